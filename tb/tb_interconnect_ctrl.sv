// tb_interconnect_ctrl -- selection register: reset to region 0, accepts
// writes of 0..M-1, ignores and counts out-of-range writes, counts changes.
module tb_interconnect_ctrl;
  logic clk = 0, rst = 1, we = 0;
  always #5 clk = ~clk;
  logic [3:0] sel_in = 0;
  logic [2:0] sel;
  logic [15:0] reloc, bad;
  int checks = 0, failures = 0;
  int exp_sel = 0, exp_reloc = 0, exp_bad = 0;
  interconnect_ctrl #(.M(8)) dut (.clk, .rst, .we, .sel_in, .sel, .relocations(reloc), .bad_writes(bad));
  initial begin
    repeat (2) @(negedge clk); rst = 0;
    checks++; if (sel != 0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 300; t++) begin
      we = $urandom_range(0, 1); sel_in = 4'($urandom_range(0, 15));
      if (we) begin
        if (sel_in < 8) begin
          if (int'(sel_in) != exp_sel) exp_reloc++;
          exp_sel = sel_in;
        end else exp_bad++;
      end
      @(negedge clk);
      checks++;
      if (int'(sel) != exp_sel || int'(reloc) != exp_reloc || int'(bad) != exp_bad) begin
        failures++; $display("FAIL t=%0d sel=%0d exp=%0d", t, sel, exp_sel);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
