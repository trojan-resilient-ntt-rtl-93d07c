// polymem_interconnect -- poly_mem InterConnect.
//
// Connects the selected NTT instance to the address generator and the
// polynomial memory: j, k, hl to addr_gen; rd_en, wr_en, ce and the two
// results U+V, U-V to poly_mem (the read data A[k0], A[k1] are broadcast).
// Writes are blocked while suppress is high, which is how the results of
// loops in flight are discarded when a fault is detected; every write that
// goes through is reported as a commit pulse.
// The buffer of this interconnect is a copy of the input polynomial, taken
// as the host loads poly_mem. A restore pulse copies it back into poly_mem
// through the memory's host port (N cycles, restore_busy high), so the whole
// transform can be repeated after a fault that is only found when it ends
// (clock-cycle-counter fault). Routing follows the paper; what the buffer
// holds and the restore sequence are this design's choices.
module polymem_interconnect
  import ntt_pkg::*;
#(
  parameter  int unsigned M    = 4,
  parameter  int unsigned N    = 256,
  localparam int unsigned SW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [SW-1:0]   sel,
  // from the NTT instances
  input  logic [LOGN-2:0] core_j     [M],
  input  logic [LOGN-2:0] core_k     [M],
  input  logic [LOGN-1:0] core_hl    [M],
  input  logic            core_rd_en [M],
  input  logic            core_wr_en [M],
  input  logic            core_ce    [M],
  input  coef_t           core_upv   [M],
  input  coef_t           core_umv   [M],
  // to addr_gen
  output logic [LOGN-2:0] j,
  output logic [LOGN-2:0] k,
  output logic [LOGN-1:0] hl,
  // to poly_mem
  output logic            rd_en,
  output logic            wr_en,
  output logic            ce,
  output coef_t           din_k0,
  output coef_t           din_k1,
  output logic            mem_host_we,
  output logic [LOGN-1:0] mem_host_addr,
  output coef_t           mem_host_wdata,
  // host load port
  input  logic            host_we,
  input  logic [LOGN-1:0] host_addr,
  input  coef_t           host_wdata,
  // fault correction
  input  logic            suppress,
  output logic            commit,
  input  logic            restore,
  output logic            restore_busy
);
  coef_t           in_buf [N];
  logic [LOGN-1:0] r_addr;

  always_comb begin
    j      = core_j[sel];
    k      = core_k[sel];
    hl     = core_hl[sel];
    rd_en  = core_rd_en[sel];
    ce     = core_ce[sel];
    wr_en  = core_wr_en[sel] && !suppress;
    din_k0 = core_upv[sel];
    din_k1 = core_umv[sel];
    commit = wr_en && ce;
    if (restore_busy) begin
      mem_host_we    = 1'b1;
      mem_host_addr  = r_addr;
      mem_host_wdata = in_buf[r_addr];
    end else begin
      mem_host_we    = host_we;
      mem_host_addr  = host_addr;
      mem_host_wdata = host_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (host_we && !restore_busy) in_buf[host_addr] <= host_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      restore_busy <= 1'b0;
      r_addr       <= '0;
    end else if (restore && !restore_busy) begin
      restore_busy <= 1'b1;
      r_addr       <= '0;
    end else if (restore_busy) begin
      r_addr <= r_addr + 1'b1;
      if (r_addr == LOGN'(N - 1)) restore_busy <= 1'b0;
    end
  end
endmodule
