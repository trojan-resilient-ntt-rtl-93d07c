// wmem_interconnect -- w_mem InterConnect.
//
// Connects the twiddle-ROM address (reversed-j) of the selected NTT instance
// to w_mem; the ROM outputs are broadcast to all instances. Its buffer holds
// the local-mask index: mask_idx is captured on mask_load (the start of a
// new transform) and addresses the mask twiddle w_r for the whole
// transform, including any repeated loops, so that every layer and every
// recomputation uses the same mask. Routing follows the paper; the content
// of the buffer is this design's choice.
module wmem_interconnect #(
  parameter  int unsigned M    = 4,
  parameter  int unsigned N    = 256,
  localparam int unsigned SW   = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LOGN = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [SW-1:0]   sel,
  input  logic [LOGN-1:0] core_rev_j [M],
  input  logic            mask_load,
  input  logic [LOGN-1:0] mask_idx,
  output logic [LOGN-1:0] addr_j,
  output logic [LOGN-1:0] addr_r
);
  always_ff @(posedge clk) begin
    if (rst)            addr_r <= '0;
    else if (mask_load) addr_r <= mask_idx;
  end

  assign addr_j = core_rev_j[sel];
endmodule
