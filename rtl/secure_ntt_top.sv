// secure_ntt_top -- Secure NTT with fault detection and adaptive correction.
//
// M copies of the NTT core stand for the M partial-reconfiguration regions
// (PR bitstreams NTT_1..NTT_m); only the one selected by the InterConnect
// CTRL is active, the others are held in reset as if unconfigured. Three bus
// interconnects (poly_mem, w_mem, Input CTRL) connect the active instance to
// the shared polynomial memory with its address generator, to the twiddle
// ROM and to the start/reset control. The fault-correction controller runs
// the transform, reacts to cfi_fault / ccc_fault of the active instance and
// asks the host side (bit patcher, ICAP; not part of this RTL) to reload or
// relocate through pr_req / pr_kind / pr_core / pr_ack. The fault injector
// emulates Trojan attacks on the active instance's control signals.
//
// Host interface: load the polynomial with host_we/host_addr/host_wdata (the
// poly_mem interconnect keeps a copy), pulse host_start with mask_idx
// (twiddle index of the local mask w_r = w^mask_idx; 0 = unmasked), wait for
// done, read the result through host_addr/host_rdata (one cycle latency).
// The result is in bit-reversed order and multiplied by w_r^log2(N).
// In a fault-free run done rises log2(N)*N/2 + 8 clock edges after the edge
// that samples host_start (1032 for N = 256: reset and start cycles, the
// 1028-cycle transform, the check cycle, the finish cycle and the registered
// done flags).
// The partition into NTT instances, interconnects, fault table and injector
// follows the paper's fault-correction architecture; modelling the PR regions
// as replicated instances, the request/acknowledge port towards the host and
// the host load/unload port are this design's own.
module secure_ntt_top
  import ntt_pkg::*;
#(
  parameter  int unsigned N           = 256,
  parameter  int unsigned M           = 4,
  parameter  int unsigned CFI_TH_RELD = 256,
  parameter  int unsigned CFI_TH_RELC = 512,
  parameter  int unsigned CCC_TH_RELD = 256,
  parameter  int unsigned CCC_TH_RELC = 512,
  localparam int unsigned LOGN        = $clog2(N),
  localparam int unsigned SW          = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LOOPS       = LOGN * N / 2,
  localparam int unsigned LW          = $clog2(LOOPS + 1)
) (
  input  logic             clk,
  input  logic             rst,
  // host: polynomial load/unload and start
  input  logic             host_we,
  input  logic [LOGN-1:0]  host_addr,
  input  coef_t            host_wdata,
  output coef_t            host_rdata,
  input  logic             host_start,
  input  logic [LOGN-1:0]  mask_idx,
  output logic             busy,
  output logic             done,
  // host: InterConnect CTRL (bit patcher selects the region)
  input  logic             ic_we,
  input  logic [SW:0]      ic_sel,
  output logic [SW-1:0]    active_ntt,
  // PR reconfiguration request to the host / ICAP
  output logic             pr_req,
  output measure_t         pr_kind,
  output logic [SW-1:0]    pr_core,
  input  logic             pr_ack,
  // fault table for the bit patcher
  output logic [CNT_W-1:0] nr     [M],
  output logic [CNT_W-1:0] n_cfi  [M],
  output logic [CNT_W-1:0] n_ccc  [M],
  output logic [CNT_W-1:0] n_meas [4],
  output measure_t         last_measure,
  // fault injector (Trojan emulation)
  input  logic             fi_arm,
  input  logic [9:0]       fi_rt,
  input  logic [9:0]       fi_rs,
  input  logic             fi_mode,
  output logic             fi_fired,
  // live fault flags of the active instance
  output logic             cfi_fault,
  output logic             ccc_fault
);
  logic [SW-1:0] sel;
  logic [15:0]   relocations, bad_writes;

  // per-instance signals
  logic            c_rst [M], c_strt [M];
  logic [LOGN-2:0] c_j [M], c_k [M];
  logic [LOGN-1:0] c_hl [M], c_rev [M];
  logic            c_rd [M], c_wr [M], c_ce [M];
  coef_t           c_upv [M], c_umv [M];
  logic            c_done [M], c_busy [M];
  logic            c_bcfi [M], c_pcfi [M], c_ucfi [M], c_cfi [M], c_ccc [M];

  // shared
  logic [LW-1:0]   start_loop;
  logic            fc_rst, fc_strt, suppress, resume_clr, restore, restore_busy;
  logic            commit;
  logic [9:0]      fr;
  logic            fi_hold, fi_armed;
  logic [LOGN-2:0] g_j, g_k;
  logic [LOGN-1:0] g_hl;
  logic [LOGN-1:0] a_rd0, a_rd1, a_wr0, a_wr1, w_addr_j, w_addr_r;
  logic            m_rd, m_wr, m_ce, m_host_we;
  logic [LOGN-1:0] m_host_addr;
  coef_t           m_din0, m_din1, m_dout0, m_dout1, m_host_wdata;
  coef_t           w_j, w_r;

  interconnect_ctrl #(.M(M)) u_icctrl (
    .clk, .rst, .we(ic_we), .sel_in(ic_sel), .sel, .relocations, .bad_writes
  );
  assign active_ntt = sel;

  fc_ctrl #(.M(M), .CFI_TH_RELD(CFI_TH_RELD), .CFI_TH_RELC(CFI_TH_RELC),
            .CCC_TH_RELD(CCC_TH_RELD), .CCC_TH_RELC(CCC_TH_RELC)) u_fc (
    .clk, .rst, .host_start, .sel,
    .cfi_fault(c_cfi[sel]), .ccc_fault(c_ccc[sel]), .core_done(c_done[sel]),
    .restore_busy, .pr_ack,
    .ntt_rst(fc_rst), .ntt_strt(fc_strt), .suppress, .resume_clr, .restore,
    .pr_req, .pr_kind, .pr_core, .busy, .done, .last_measure,
    .nr, .n_cfi, .n_ccc, .n_meas
  );

  inctrl_interconnect #(.M(M), .N(N)) u_ic_in (
    .clk, .rst, .sel, .ntt_rst_in(fc_rst), .ntt_strt_in(fc_strt),
    .commit, .resume_clr, .ntt_rst(c_rst), .ntt_strt(c_strt), .start_loop
  );

  wmem_interconnect #(.M(M), .N(N)) u_ic_w (
    .clk, .rst, .sel, .core_rev_j(c_rev),
    .mask_load(host_start && !busy), .mask_idx,
    .addr_j(w_addr_j), .addr_r(w_addr_r)
  );

  polymem_interconnect #(.M(M), .N(N)) u_ic_pm (
    .clk, .rst, .sel,
    .core_j(c_j), .core_k(c_k), .core_hl(c_hl),
    .core_rd_en(c_rd), .core_wr_en(c_wr), .core_ce(c_ce),
    .core_upv(c_upv), .core_umv(c_umv),
    .j(g_j), .k(g_k), .hl(g_hl),
    .rd_en(m_rd), .wr_en(m_wr), .ce(m_ce), .din_k0(m_din0), .din_k1(m_din1),
    .mem_host_we(m_host_we), .mem_host_addr(m_host_addr),
    .mem_host_wdata(m_host_wdata),
    .host_we(host_we && !busy), .host_addr, .host_wdata,
    .suppress, .commit, .restore, .restore_busy
  );

  addr_gen #(.N(N)) u_addr (
    .clk, .rst, .j(g_j), .k(g_k), .hl(g_hl),
    .addr_rd_k0(a_rd0), .addr_rd_k1(a_rd1), .addr_wr_k0(a_wr0), .addr_wr_k1(a_wr1)
  );

  poly_mem #(.N(N)) u_pmem (
    .clk, .ce(m_ce), .rd_en(m_rd), .wr_en(m_wr),
    .addr_rd_k0(a_rd0), .addr_rd_k1(a_rd1), .addr_wr_k0(a_wr0), .addr_wr_k1(a_wr1),
    .din_k0(m_din0), .din_k1(m_din1), .dout_k0(m_dout0), .dout_k1(m_dout1),
    .host_we(m_host_we), .host_addr(m_host_addr), .host_wdata(m_host_wdata),
    .host_rdata
  );

  w_mem #(.N(N)) u_wmem (.addr_j(w_addr_j), .addr_r(w_addr_r), .w_j, .w_r);

  fault_injector u_fi (
    .clk, .rst, .arm(fi_arm), .rt(fi_rt), .rs(fi_rs), .mode(fi_mode),
    .act(fc_strt), .fr, .hold(fi_hold), .armed(fi_armed), .fired(fi_fired)
  );

  for (genvar i = 0; i < M; i++) begin : g_ntt
    ntt_core #(.N(N)) u_ntt (
      .clk, .ntt_rst(c_rst[i]), .ntt_strt(c_strt[i]), .start_loop,
      .fr((SW'(i) == sel) ? fr : 10'h3FF),
      .hold((SW'(i) == sel) && fi_hold),
      .a_k0(m_dout0), .a_k1(m_dout1),
      .j(c_j[i]), .k(c_k[i]), .hl(c_hl[i]),
      .rd_en(c_rd[i]), .wr_en(c_wr[i]), .ce(c_ce[i]),
      .u_plus_v(c_upv[i]), .u_minus_v(c_umv[i]),
      .reversed_j(c_rev[i]), .w_j, .w_r,
      .done(c_done[i]), .busy(c_busy[i]),
      .barrett_cfi_fault(c_bcfi[i]), .polymem_cfi_fault(c_pcfi[i]),
      .uv_cfi_fault(c_ucfi[i]), .cfi_fault(c_cfi[i]), .ccc_fault(c_ccc[i])
    );
  end

  assign cfi_fault = c_cfi[sel];
  assign ccc_fault = c_ccc[sel];
endmodule
