// tb_cfi_detector -- drives the checker with the control signals of a
// reference CSR (built in the testbench from the CSR equations). A clean
// run must raise no flag and keep RSR equal to the CSR. Then each of the
// six active-high signals is blocked (forced low) and two reset signals are
// forced high for one cycle in the middle of a run; the fault must be
// flagged in that very cycle by the expected detector.
module tb_cfi_detector;
  import ntt_pkg::*;
  localparam int E = 300;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  ctrl_sig_t sig;
  logic [3:0] csr = 0, rsr;
  logic bf, pf, uf, cf;
  int checks = 0, failures = 0;
  cfi_detector dut (.clk, .rst, .sig, .csr, .rsr, .barrett_cfi_fault(bf),
                    .polymem_cfi_fault(pf), .uv_cfi_fault(uf), .cfi_fault(cf));

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic ctrl_sig_t clean(input logic [3:0] c, input logic r);
    ctrl_sig_t s;
    s.rd_en = c[3]; s.wr_en = c[0]; s.polymem_ce = c[0] | c[3];
    s.ctrl_rst = r; s.ubuff_rst = r;
    s.barrett_strt = c[1] | c[2]; s.barrett_rst = !(c[1] | c[2]);
    s.barrett_done = c[0]; s.uv_strt = c[0]; s.uv_rst = !c[0];
    return s;
  endfunction

  // one run; fault_bit < 0: none; flips signal fault_bit at cycle fc
  task automatic run(input int fault_bit, input int fc, input int exp_flag);
    bit seen = 0;
    @(negedge clk); rst = 1; csr = 0; sig = clean(csr, 1); @(negedge clk); rst = 0;
    for (int c = 1; c <= E + 6; c++) begin
      csr = {(c >= 1 && c <= E), csr[3:1]};
      sig = clean(csr, 0);
      if (c == fc) sig = ctrl_sig_t'(10'(sig) ^ (10'(1) << fault_bit));
      #1;
      if (fault_bit < 0) begin
        chk(!cf, $sformatf("clean run flagged at c=%0d", c));
        chk(rsr == csr, $sformatf("RSR != CSR at c=%0d", c));
      end else if (c == fc) begin
        seen = 1;
        chk(cf, $sformatf("bit %0d at c=%0d not flagged", fault_bit, c));
        chk((exp_flag == 0 && bf) || (exp_flag == 1 && pf) || (exp_flag == 2 && uf),
            $sformatf("bit %0d: wrong detector b%0d p%0d u%0d", fault_bit, bf, pf, uf));
      end else if (c < fc) begin
        chk(!cf, $sformatf("flag before fault c=%0d", c));
      end
      @(negedge clk);
    end
    if (fault_bit >= 0) chk(seen, "fault applied");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run(-1, 0, 0);
    for (int t = 0; t < 4; t++) begin
      automatic int fc = $urandom_range(10, E - 10);
      run(0, fc, 2);   // rd_en blocked: CSR[3] != RSR[3]
      run(1, fc, 1);   // wr_en blocked
      run(2, fc, 1);   // polymem_ce blocked
      run(6, fc, 0);   // barrett_strt blocked
      run(7, fc, 0);   // barrett_done blocked
      run(9, fc, 2);   // uv_strt blocked
      run(5, fc, 0);   // barrett_rst forced high
      run(8, fc, 2);   // uv_rst forced high
    end
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
