// tb_wmem_interconnect -- the ROM address follows the selected region's
// reversed-j; the mask index is captured only on mask_load and held.
module tb_wmem_interconnect;
  localparam int M = 8, N = 256;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [2:0] sel = 0;
  logic [7:0] rev [M], midx = 0, aj, ar;
  logic ml = 0;
  int checks = 0, failures = 0, exp_r = 0;
  wmem_interconnect #(.M(M), .N(N)) dut (.clk, .rst, .sel, .core_rev_j(rev), .mask_load(ml),
    .mask_idx(midx), .addr_j(aj), .addr_r(ar));
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    for (int t = 0; t < 2000; t++) begin
      sel = 3'($urandom);
      for (int i = 0; i < M; i++) rev[i] = 8'($urandom);
      midx = 8'($urandom); ml = ($urandom_range(0, 9) == 0);
      #1;
      checks++;
      if (aj != rev[sel]) begin failures++; $display("FAIL addr_j t=%0d", t); end
      if (ml) exp_r = midx;
      @(negedge clk);
      checks++;
      if (int'(ar) != exp_r) begin failures++; $display("FAIL addr_r t=%0d", t); end
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
