// ccc -- Clock Cycle Counter.
//
// Counts, from the NTT start pulse, how many cycles each active-high control
// or status signal (rd_en, wr_en, polymem_ce, barrett_strt, barrett_done,
// uv_strt, as delivered to the sub-components) is high, and how many cycles
// the run lasts. For a run of E = NL - start_loop loops (E = 1024 for a full
// transform with N = 256) the pipeline fixes these numbers exactly:
//   rd_en, wr_en, barrett_done, uv_strt : E
//   barrett_strt                        : E + 1
//   polymem_ce                          : E + 3   (2E when E < 3)
//   cycles from start to done           : E + 4
// When done rises the counts are compared and ccc_fault is set on any
// difference; it is also set as soon as the run outlasts E + 4 cycles
// without done (a stalled NTT). ccc_fault is registered (valid the cycle
// after done rises) and stays set until rst. The paper states the principle
// (signals must stay active for a fixed, correlated number of cycles, 1024
// for n = 256); the per-signal expected values are derived here from the
// pipeline.
module ccc
  import ntt_pkg::*;
#(
  parameter  int unsigned N     = 256,
  localparam int unsigned LOOPS = $clog2(N) * N / 2,
  localparam int unsigned LW    = $clog2(LOOPS + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          strt,
  input  logic [LW-1:0] start_loop,
  input  ctrl_sig_t     sig,
  input  logic          done,
  output logic          ccc_fault
);
  localparam int unsigned KW = LW + 2;
  typedef logic [KW-1:0] cnt_t;

  logic started, checked;
  cnt_t exp_e, elapsed;
  cnt_t n_rd, n_wr, n_ce, n_bs, n_bd, n_uv;
  cnt_t exp_ce;

  always_comb exp_ce = (exp_e >= cnt_t'(3)) ? exp_e + cnt_t'(3) : exp_e << 1;

  always_ff @(posedge clk) begin
    if (rst) begin
      started   <= 1'b0;
      checked   <= 1'b0;
      ccc_fault <= 1'b0;
      exp_e     <= '0;
      elapsed   <= '0;
      n_rd <= '0; n_wr <= '0; n_ce <= '0; n_bs <= '0; n_bd <= '0; n_uv <= '0;
    end else begin
      if (strt && !started) begin
        started <= 1'b1;
        exp_e   <= cnt_t'(LOOPS) - cnt_t'(start_loop);
      end
      if (started && !done && !checked) begin
        elapsed <= elapsed + 1'b1;
        n_rd <= n_rd + cnt_t'(sig.rd_en);
        n_wr <= n_wr + cnt_t'(sig.wr_en);
        n_ce <= n_ce + cnt_t'(sig.polymem_ce);
        n_bs <= n_bs + cnt_t'(sig.barrett_strt);
        n_bd <= n_bd + cnt_t'(sig.barrett_done);
        n_uv <= n_uv + cnt_t'(sig.uv_strt);
        if (elapsed >= exp_e + cnt_t'(PIPE_DEPTH - 1)) ccc_fault <= 1'b1;
      end
      if (started && done && !checked) begin
        checked <= 1'b1;
        if (elapsed != exp_e + cnt_t'(PIPE_DEPTH - 2) ||
            n_rd != exp_e || n_wr != exp_e || n_bd != exp_e || n_uv != exp_e ||
            n_bs != exp_e + cnt_t'(1) || n_ce != exp_ce)
          ccc_fault <= 1'b1;
      end
    end
  end
endmodule
