// ntt_core -- one Secure NTT instance (one partial-reconfiguration region).
//
// Contents: the CTRL unit with its CSR (ntt_ctrl), the bit reverser for the
// twiddle address, the U buffer, the two-stage Barrett multiplier, the
// uv_adder and uv_sub units with their Local Mask multipliers, and the two
// fault detectors (cfi_detector with its independent RSR, and the ccc).
// The polynomial memory, the twiddle ROM and the address generator are
// outside, reached through the bus interconnects, as in the paper.
//
// Pipeline of one butterfly (five stages, one butterfly issued per cycle):
//   issue (strt / counter) -> memory read [rd_en = CSR[3]; A[k0], A[k1]
//   and w_j are registered] -> Barrett stage 1 [CSR[2]] -> Barrett stage 2
//   [CSR[1]] -> add/sub, mask and memory write [wr_en = CSR[0]].
// A full transform takes log2(N)*N/2 + 4 cycles from strt to done
// (1028 for N = 256). The output polynomial is in bit-reversed order and,
// because each of the log2(N) layers multiplies its results by w_r, it is
// scaled by w_r^log2(N): out[p] = w_r^log2(N) * A(w^bitrev(p)).
//
// Control/status signals are produced by the CTRL unit (and barrett_done by
// the Barrett unit) and pass through "F_r AND signal" gates before they
// reach the sub-components (fault-injection point of the paper's Fig. 9).
// CTRL_rst and uBuff_rst are the ntt_rst input. fr = all ones and hold = 0
// in normal operation. The detectors observe the gated signals. The w_j
// register and the start_loop/hold inputs are this design's additions.
module ntt_core
  import ntt_pkg::*;
#(
  parameter  int unsigned N     = 256,
  localparam int unsigned LOGN  = $clog2(N),
  localparam int unsigned LOOPS = LOGN * N / 2,
  localparam int unsigned LW    = $clog2(LOOPS + 1)
) (
  input  logic            clk,
  input  logic            ntt_rst,
  input  logic            ntt_strt,
  input  logic [LW-1:0]   start_loop,
  input  logic [9:0]      fr,          // fault-injector word, '1 = no fault
  input  logic            hold,        // delay-Trojan emulation, 0 = none
  // poly_mem side
  input  coef_t           a_k0,
  input  coef_t           a_k1,
  output logic [LOGN-2:0] j,
  output logic [LOGN-2:0] k,
  output logic [LOGN-1:0] hl,
  output logic            rd_en,
  output logic            wr_en,
  output logic            ce,
  output coef_t           u_plus_v,
  output coef_t           u_minus_v,
  // w_mem side
  output logic [LOGN-1:0] reversed_j,
  input  coef_t           w_j,
  input  coef_t           w_r,
  // status
  output logic            done,
  output logic            busy,
  output logic            barrett_cfi_fault,
  output logic            polymem_cfi_fault,
  output logic            uv_cfi_fault,
  output logic            cfi_fault,
  output logic            ccc_fault
);
  ctrl_sig_t     raw, sig;
  logic [3:0]    csr, rsr;
  logic [LW-1:0] loop;
  logic          bdone;
  logic [LOGN-2:0] rev;
  coef_t         w_q, u_d, v;

  ntt_ctrl #(.N(N)) u_ctrl (
    .clk, .ctrl_rst(sig.ctrl_rst), .strt(ntt_strt), .start_loop, .hold,
    .csr, .loop, .j, .k, .hl,
    .rd_en(raw.rd_en), .wr_en(raw.wr_en), .polymem_ce(raw.polymem_ce),
    .barrett_strt(raw.barrett_strt), .barrett_rst(raw.barrett_rst),
    .uv_strt(raw.uv_strt), .uv_rst(raw.uv_rst), .busy, .done
  );

  assign raw.ctrl_rst     = ntt_rst;
  assign raw.ubuff_rst    = ntt_rst;
  assign raw.barrett_done = bdone;

  // Fault-injection gates (F_r[i] AND signal i)
  assign sig = ctrl_sig_t'(fr & raw);

  bit_reverser #(.WIDTH(LOGN-1)) u_brev (.j, .reversed_j(rev));
  assign reversed_j = {1'b0, rev};

  // w_j is read in the memory-read stage and kept beside A[k1]
  always_ff @(posedge clk) begin
    if (sig.ctrl_rst)   w_q <= '0;
    else if (sig.rd_en) w_q <= w_j;
  end

  u_buffer u_ubuf (.clk, .ubuff_rst(sig.ubuff_rst), .u_in(a_k0), .u_out(u_d));

  barrett u_barrett (
    .clk, .barrett_rst(sig.barrett_rst), .barrett_strt(sig.barrett_strt),
    .a(a_k1), .w(w_q), .v, .barrett_done(bdone)
  );

  uv_unit #(.IS_SUB(1'b0)) u_uv_add (
    .uv_rst(sig.uv_rst), .uv_strt(sig.uv_strt), .u(u_d), .v, .w_r, .res(u_plus_v));
  uv_unit #(.IS_SUB(1'b1)) u_uv_sub (
    .uv_rst(sig.uv_rst), .uv_strt(sig.uv_strt), .u(u_d), .v, .w_r, .res(u_minus_v));

  cfi_detector u_cfi (
    .clk, .rst(ntt_rst), .sig, .csr, .rsr,
    .barrett_cfi_fault, .polymem_cfi_fault, .uv_cfi_fault, .cfi_fault
  );

  ccc #(.N(N)) u_ccc (
    .clk, .rst(ntt_rst), .strt(ntt_strt), .start_loop, .sig, .done, .ccc_fault
  );

  assign rd_en = sig.rd_en;
  assign wr_en = sig.wr_en;
  assign ce    = sig.polymem_ce;
endmodule
