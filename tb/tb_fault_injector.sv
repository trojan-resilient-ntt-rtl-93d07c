// tb_fault_injector -- F_r must be all ones except in the single cycle
// R_t + 2 cycles after the activation pulse, where it equals R_s; the
// injector must disarm after firing; mode 1 must give one hold cycle
// instead; the paper's example R_t = 1002, R_s = 766 (F_r = 1011111110)
// is included.
module tb_fault_injector;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic arm = 0, mode = 0, act = 0, hold, armed, fired;
  logic [9:0] rt = 0, rs = 0, fr;
  int checks = 0, failures = 0;
  fault_injector dut (.clk, .rst, .arm, .rt, .rs, .mode, .act, .fr, .hold, .armed, .fired);

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic trial(input int t, input int s, input bit md);
    @(negedge clk); arm = 1; rt = 10'(t); rs = 10'(s); mode = md;
    @(negedge clk); arm = 0; act = 1;          // activation in cycle 0
    @(negedge clk); act = 0;
    for (int c = 1; c < 1100; c++) begin
      if (c == t + 2) begin
        chk(fr == (md ? 10'h3FF : 10'(s)), $sformatf("F_r at cycle %0d = %b", c, fr));
        chk(hold == md && fired, "hold/fired in the attack cycle");
      end else begin
        chk(fr == 10'h3FF && !hold, $sformatf("F_r idle at cycle %0d", c));
      end
      @(negedge clk);
    end
    chk(!armed, "disarmed after firing");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    trial(1002, 766, 0);
    chk(10'(766) == 10'b1011111110, "paper example word");
    for (int i = 0; i < 5; i++) trial($urandom_range(0, 1023), $urandom_range(0, 1023), 0);
    trial($urandom_range(0, 1023), 0, 1);
    // not armed: nothing happens
    @(negedge clk); act = 1; @(negedge clk); act = 0;
    for (int c = 0; c < 1100; c++) begin
      chk(fr == '1 && !hold, "unarmed injector is silent");
      @(negedge clk);
    end
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
