// interconnect_ctrl -- InterConnect CTRL: selects the active NTT region.
//
// Holds the index of the NTT instance (partial-reconfiguration region) that
// the three bus interconnects connect to the memories and control inputs.
// The host (the bit patcher) writes it when it relocates the NTT; writes of
// an index outside 0..M-1 are ignored and counted in bad_writes. After
// reset instance 0 is active. relocations counts accepted writes that
// changed the selection. The paper names this block and its role; the
// register interface is this design's.
module interconnect_ctrl #(
  parameter  int unsigned M  = 4,
  localparam int unsigned SW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          we,
  input  logic [SW:0]   sel_in,
  output logic [SW-1:0] sel,
  output logic [15:0]   relocations,
  output logic [15:0]   bad_writes
);
  always_ff @(posedge clk) begin
    if (rst) begin
      sel         <= '0;
      relocations <= '0;
      bad_writes  <= '0;
    end else if (we) begin
      if (sel_in < (SW+1)'(M)) begin
        sel <= SW'(sel_in);
        if (SW'(sel_in) != sel) relocations <= relocations + 1'b1;
      end else begin
        bad_writes <= bad_writes + 1'b1;
      end
    end
  end
endmodule
