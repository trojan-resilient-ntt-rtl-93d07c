// tb_addr_gen -- walks the (j, k, hl) sequence of all eight stages of a
// 256-point transform and checks k0 = 2*hl*j + k, k1 = k0 + hl on the read
// side and the same addresses three cycles later on the write side.
module tb_addr_gen;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [6:0] j = 0, k = 0;
  logic [7:0] hl = 128, r0, r1, w0, w1;
  int exp0 [$], exp1 [$];
  int checks = 0, failures = 0;
  addr_gen #(.N(256)) dut (.clk, .rst, .j, .k, .hl, .addr_rd_k0(r0), .addr_rd_k1(r1),
                           .addr_wr_k0(w0), .addr_wr_k1(w1));
  initial begin
    automatic int c = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 8; i++) begin
      automatic int h = 128 >> i;
      for (int jj = 0; jj < (1 << i); jj++)
        for (int kk = 0; kk < h; kk++) begin
          j = 7'(jj); k = 7'(kk); hl = 8'(h);
          #1;
          exp0.push_back(2 * h * jj + kk); exp1.push_back(2 * h * jj + kk + h);
          checks += 2;
          if (int'(r0) != exp0[c] || int'(r1) != exp1[c]) begin
            failures++; $display("FAIL rd i=%0d j=%0d k=%0d", i, jj, kk);
          end
          if (c >= 3) begin
            checks++;
            if (int'(w0) != exp0[c-3] || int'(w1) != exp1[c-3]) begin
              failures++; $display("FAIL wr c=%0d", c);
            end
          end
          @(negedge clk);
          c++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
