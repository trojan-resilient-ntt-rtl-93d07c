// uv_unit -- butterfly adder (IS_SUB = 0) or subtractor (IS_SUB = 1) with a
// Local Mask (LM) multiplier.
//
// res = ((U + V) mod q) * w_r mod q   or   ((U - V) mod q) * w_r mod q.
// Multiplying every result written back to the polynomial memory by the
// random twiddle w_r masks the stored coefficients (paper, Eq. 2). The unit
// is combinational and feeds the memory write in the same cycle, which is
// the cycle where uv_strt (CSR[0]) and wr_en are high. While uv_rst is high,
// or uv_strt is low, the output is held at 0 (the reset condition). With
// w_r = 1 the unit is the plain butterfly of Eq. 1. The add/sub/mask
// function is the paper's; combinational timing and the zero output in
// reset are this design's choices.
module uv_unit
  import ntt_pkg::*;
#(
  parameter bit IS_SUB = 1'b0
) (
  input  logic  uv_rst,
  input  logic  uv_strt,
  input  coef_t u,
  input  coef_t v,
  input  coef_t w_r,
  output coef_t res
);
  coef_t s;
  always_comb begin
    s   = IS_SUB ? mod_sub(u, v) : mod_add(u, v);
    res = (uv_rst || !uv_strt) ? '0 : mod_mul(s, w_r);
  end
endmodule
