// tb_barrett -- streams random and corner-case operands through the
// two-stage multiplier: V must equal a*w mod q two cycles later and
// barrett_done must be high exactly when a valid V is present (two cycles
// after barrett_strt rises, one cycle after it falls).
module tb_barrett;
  import ntt_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic brst = 1, bstrt = 0, bdone;
  coef_t a = 0, w = 0, v;
  longint exp_q [$];
  int checks = 0, failures = 0;
  barrett dut (.clk, .barrett_rst(brst), .barrett_strt(bstrt), .a, .w, .v, .barrett_done(bdone));
  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    brst = 0; bstrt = 1;
    cyc = 0;
    for (int c = 0; c < 3000; c++) begin
      if (c < 4)       begin a = 3328; w = 3328; end
      else if (c < 8)  begin a = 0;    w = 3328; end
      else begin a = coef_t'($urandom_range(0, 3328)); w = coef_t'($urandom_range(0, 3328)); end
      exp_q.push_back((longint'(a) * longint'(w)) % 3329);
      @(negedge clk);
      // done: rises in the second cycle of strt
      checks++;
      if (bdone != (c >= 1)) begin failures++; $display("FAIL: done at %0d", c); end
      if (c >= 1) begin
        checks++;
        if (longint'(v) != exp_q[c-1]) begin
          failures++; $display("FAIL: c=%0d v=%0d exp=%0d", c, v, exp_q[c-1]);
        end
      end
    end
    bstrt = 0;  // first cycle with strt low: the last V is still valid
    #1;
    checks++; if (bdone != 1) begin failures++; $display("FAIL: done must fall one cycle late"); end
    @(negedge clk);
    checks++; if (bdone != 0) begin failures++; $display("FAIL: done stuck"); end
    brst = 1; @(negedge clk);
    checks++; if (v != 0 || bdone != 0) begin failures++; $display("FAIL: reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
