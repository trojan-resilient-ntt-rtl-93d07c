// tb_ccc -- feeds the counter the signal waveforms of runs of E loops
// (E = 1024 for a full transform, and resumed runs), built from the CSR
// equations in the testbench. A correct run must not be flagged; a run
// with one extra cycle of activity, one missing cycle of any signal, or a
// run that never finishes must be.
module tb_ccc;
  import ntt_pkg::*;
  localparam int N = 256, LOOPS = 1024;
  logic clk = 0, rst = 1, strt = 0, done = 0;
  always #5 clk = ~clk;
  logic [10:0] start_loop = 0;
  ctrl_sig_t sig;
  logic fault;
  int checks = 0, failures = 0;
  ccc #(.N(N)) dut (.clk, .rst, .strt, .start_loop, .sig, .done, .ccc_fault(fault));

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  // kind 0 clean, 1 stretch (CSR held one cycle), 2 drop bit b at cycle fc, 3 no done
  task automatic run(input int s0, input int kind, input int b, input int fc);
    logic [3:0] csr;
    int e, c, hold_at;
    bit finished;
    e = LOOPS - s0;
    hold_at = (kind == 1) ? e / 2 : -1;
    @(negedge clk); rst = 1; done = 0; csr = 0; sig = '0; @(negedge clk); rst = 0;
    start_loop = 11'(s0); strt = 1; @(negedge clk); strt = 0;
    c = 1; finished = 0;
    while (c < e + 40 && !finished) begin
      if (c != hold_at + 1 || hold_at < 0)
        csr = {(c >= 1 && c <= e + ((kind == 1) ? 1 : 0)), csr[3:1]};
      sig = '0;
      sig.rd_en = csr[3]; sig.wr_en = csr[0]; sig.polymem_ce = csr[0] | csr[3];
      sig.barrett_strt = csr[1] | csr[2]; sig.barrett_done = csr[0]; sig.uv_strt = csr[0];
      if (kind == 2 && c == fc) sig = ctrl_sig_t'(10'(sig) & ~(10'(1) << b));
      if (c >= e + 4 + ((kind == 1) ? 1 : 0) && kind != 3) done = 1;
      @(negedge clk);
      if (done) finished = 1;
      c++;
    end
    @(negedge clk);
    chk(fault == (kind != 0), $sformatf("start %0d kind %0d bit %0d: fault=%0d", s0, kind, b, fault));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run(0, 0, 0, 0);
    run(1000, 0, 0, 0);
    run(1022, 0, 0, 0);
    run(517, 0, 0, 0);
    run(0, 1, 0, 0);
    run(300, 1, 0, 0);
    run(0, 2, 0, 500); run(0, 2, 1, 500); run(0, 2, 2, 500);
    run(0, 2, 6, 500); run(0, 2, 7, 500); run(0, 2, 9, 500);
    run(0, 3, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
