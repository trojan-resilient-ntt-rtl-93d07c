// tb_inctrl_interconnect -- NTT_rst/NTT_strt reach only the selected region
// (others held in reset), and the resume buffer counts commits, saturates
// at the loop count and clears on resume_clr.
module tb_inctrl_interconnect;
  localparam int M = 8, N = 256;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [2:0] sel = 0;
  logic rin = 0, sin = 0, commit = 0, clr = 0;
  logic ro [M], so [M];
  logic [10:0] sl;
  int checks = 0, failures = 0, exp_sl = 0;
  inctrl_interconnect #(.M(M), .N(N)) dut (.clk, .rst, .sel, .ntt_rst_in(rin), .ntt_strt_in(sin),
    .commit, .resume_clr(clr), .ntt_rst(ro), .ntt_strt(so), .start_loop(sl));
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int t = 0; t < 3000; t++) begin
      sel = 3'($urandom); rin = $urandom_range(0, 1); sin = $urandom_range(0, 1);
      commit = $urandom_range(0, 3) != 0; clr = ($urandom_range(0, 999) == 0);
      #1;
      for (int i = 0; i < M; i++) begin
        checks++;
        if (ro[i] != ((i == sel) ? rin : 1'b1) || so[i] != ((i == sel) ? sin : 1'b0)) begin
          failures++; $display("FAIL routing t=%0d i=%0d", t, i);
        end
      end
      if (clr) exp_sl = 0; else if (commit && exp_sl < 1024) exp_sl++;
      @(negedge clk);
      checks++;
      if (int'(sl) != exp_sl) begin failures++; $display("FAIL resume %0d exp %0d", sl, exp_sl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
