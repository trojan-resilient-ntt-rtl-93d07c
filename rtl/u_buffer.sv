// u_buffer -- two-cycle pipeline buffer for u = A[k0].
//
// u arrives from the polynomial memory in the same cycle as A[k1] enters the
// two-stage Barrett multiplier; V appears two cycles later, so u is delayed
// by two registers to meet it at the add/sub units (as the paper states).
// uBuff_rst (= NTT rst) clears both stages synchronously. The registers run
// every cycle; the paper lists no enable for this block.
module u_buffer
  import ntt_pkg::*;
(
  input  logic  clk,
  input  logic  ubuff_rst,
  input  coef_t u_in,
  output coef_t u_out
);
  coef_t u_d1, u_d2;
  always_ff @(posedge clk) begin
    if (ubuff_rst) begin
      u_d1 <= '0;
      u_d2 <= '0;
    end else begin
      u_d1 <= u_in;
      u_d2 <= u_d1;
    end
  end
  assign u_out = u_d2;
endmodule
