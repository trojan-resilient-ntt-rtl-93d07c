// poly_mem -- polynomial coefficient memory, 12 x N.
//
// Two synchronous read ports deliver A[k0] and A[k1] one cycle after rd_en
// (the "memory read" pipeline stage); two write ports store U+V at k0 and
// U-V at k1 when wr_en is high (the "memory write" stage). Both need
// polymem_ce. A separate host port loads the input polynomial and reads the
// result (synchronous read, one cycle latency); it is used only while no
// NTT is running and is not gated by ce. If a butterfly write and a host
// write hit the same address in one cycle the butterfly write wins.
// The size and the rd_en/wr_en/ce controls are the paper's; the port count
// and the host port are this design's (the paper's butterfly reads and
// writes two coefficients per cycle, which needs two ports of each kind).
module poly_mem
  import ntt_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic                 clk,
  input  logic                 ce,
  input  logic                 rd_en,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] addr_rd_k0,
  input  logic [$clog2(N)-1:0] addr_rd_k1,
  input  logic [$clog2(N)-1:0] addr_wr_k0,
  input  logic [$clog2(N)-1:0] addr_wr_k1,
  input  coef_t                din_k0,
  input  coef_t                din_k1,
  output coef_t                dout_k0,
  output coef_t                dout_k1,
  input  logic                 host_we,
  input  logic [$clog2(N)-1:0] host_addr,
  input  coef_t                host_wdata,
  output coef_t                host_rdata
);
  coef_t mem [N];

  always_ff @(posedge clk) begin
    if (host_we) mem[host_addr] <= host_wdata;
    if (ce && wr_en) begin
      mem[addr_wr_k0] <= din_k0;
      mem[addr_wr_k1] <= din_k1;
    end
    if (ce && rd_en) begin
      dout_k0 <= mem[addr_rd_k0];
      dout_k1 <= mem[addr_rd_k1];
    end
    host_rdata <= mem[host_addr];
  end
endmodule
