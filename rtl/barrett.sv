// barrett -- two-stage pipelined modular multiplier V = A[k1] * w mod q.
//
// Stage 1 registers the 24-bit product, stage 2 registers its Barrett
// reduction (ntt_pkg::barrett_reduce). Both stages load only while
// barrett_strt is high and are cleared while barrett_rst is high.
// barrett_done is the status output: it goes high two cycles after
// barrett_strt rises and falls one cycle after barrett_strt falls, i.e. it
// is high exactly in the cycles where a valid V is at the output, which in
// the NTT pipeline coincides with wr_en (CSR[0]). The two pipeline stages,
// the control/status names and the done alignment follow the paper; the
// product/reduction split of the two stages is this design's choice.
module barrett
  import ntt_pkg::*;
(
  input  logic  clk,
  input  logic  barrett_rst,
  input  logic  barrett_strt,
  input  coef_t a,
  input  coef_t w,
  output coef_t v,
  output logic  barrett_done
);
  logic [23:0] prod_q;
  logic        v1_q;

  always_ff @(posedge clk) begin
    if (barrett_rst) begin
      prod_q       <= '0;
      v            <= '0;
      v1_q         <= 1'b0;
      barrett_done <= 1'b0;
    end else begin
      v1_q         <= barrett_strt;
      barrett_done <= v1_q & barrett_strt;
      if (barrett_strt) begin
        prod_q <= 24'(a) * 24'(w);
        v      <= barrett_reduce(prod_q);
      end
    end
  end
endmodule
