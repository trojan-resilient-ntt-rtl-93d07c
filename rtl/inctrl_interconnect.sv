// inctrl_interconnect -- Input CTRL InterConnect.
//
// Routes the control inputs NTT_rst and NTT_strt to the selected NTT
// instance; every other instance is held in reset (it stands for a blank,
// unconfigured region). It also buffers the loop to resume from: resume_loop
// counts the butterfly loops whose results were written back without a
// fault (commit pulses from the poly_mem interconnect) and is cleared by
// resume_clr. It is the start_loop of every (re)start, so a repeated,
// reloaded or relocated NTT continues with the first loop whose result was
// discarded. The routing is the paper's; the paper says each interconnect
// keeps a buffer of previous values for recomputation, and the loop counter
// is this design's form of that buffer for the control inputs.
module inctrl_interconnect #(
  parameter  int unsigned M     = 4,
  parameter  int unsigned N     = 256,
  localparam int unsigned SW    = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LOOPS = $clog2(N) * N / 2,
  localparam int unsigned LW    = $clog2(LOOPS + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [SW-1:0] sel,
  input  logic          ntt_rst_in,
  input  logic          ntt_strt_in,
  input  logic          commit,
  input  logic          resume_clr,
  output logic          ntt_rst  [M],
  output logic          ntt_strt [M],
  output logic [LW-1:0] start_loop
);
  always_ff @(posedge clk) begin
    if (rst || resume_clr)                     start_loop <= '0;
    else if (commit && start_loop < LW'(LOOPS)) start_loop <= start_loop + 1'b1;
  end

  always_comb begin
    for (int unsigned i = 0; i < M; i++) begin
      ntt_rst[i]  = (SW'(i) == sel) ? ntt_rst_in  : 1'b1;
      ntt_strt[i] = (SW'(i) == sel) ? ntt_strt_in : 1'b0;
    end
  end
endmodule
