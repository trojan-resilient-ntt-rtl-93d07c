// tb_u_buffer -- u must come out exactly two cycles after it goes in, and
// uBuff_rst must clear the pipeline.
module tb_u_buffer;
  import ntt_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  coef_t din = 0, dout;
  coef_t hist [$];
  int checks = 0, failures = 0;
  u_buffer dut (.clk, .ubuff_rst(rst), .u_in(din), .u_out(dout));
  initial begin
    repeat (3) @(negedge clk);
    checks++; if (dout != 0) begin failures++; $display("FAIL: not cleared"); end
    rst = 0;
    for (int c = 0; c < 200; c++) begin
      din = coef_t'($urandom_range(0, 3328));
      hist.push_back(din);
      @(negedge clk);
      if (c >= 1) begin
        checks++;
        if (dout != hist[c-1]) begin failures++; $display("FAIL: cycle %0d", c); end
      end
    end
    rst = 1; @(negedge clk); @(negedge clk);
    checks++; if (dout != 0) begin failures++; $display("FAIL: reset"); end
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
