// tb_ntt_ctrl -- the CSR timing of a full 256-point transform: rd_en high in
// cycles 1..1024 after the start pulse, the other CSR bits following one
// cycle apart, wr_en in 4..1027, done at 1028; derived signals as in the
// CSR equations; (j, k, hl) in the order of the nested loops of the NTT
// algorithm. Then a resumed run from loop 1000 and the hold input.
module tb_ntt_ctrl;
  localparam int N = 256, LOOPS = 1024;
  logic clk = 0, rst = 1, strt = 0, hold = 0;
  always #5 clk = ~clk;
  logic [10:0] start_loop = 0, loop;
  logic [3:0] csr;
  logic [6:0] j, k;
  logic [7:0] hl;
  logic rd_en, wr_en, ce, bs, br, us, ur, busy, done;
  int checks = 0, failures = 0;
  ntt_ctrl #(.N(N)) dut (.clk, .ctrl_rst(rst), .strt, .start_loop, .hold, .csr, .loop, .j, .k, .hl,
    .rd_en, .wr_en, .polymem_ce(ce), .barrett_strt(bs), .barrett_rst(br), .uv_strt(us),
    .uv_rst(ur), .busy, .done);

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic run(input int s0);
    int jq [$], kq [$], hq [$];
    int e, c;
    // reference order of Algorithm 1 loops, starting at loop s0
    for (int i = 0; i < 8; i++)
      for (int jj = 0; jj < (1 << i); jj++)
        for (int kk = 0; kk < (128 >> i); kk++) begin
          jq.push_back(jj); kq.push_back(kk); hq.push_back(128 >> i);
        end
    e = LOOPS - s0;
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    start_loop = 11'(s0); strt = 1;       // cycle 0
    @(negedge clk); strt = 0;
    for (c = 1; c <= e + 5; c++) begin
      chk(csr[3] == (c >= 1 && c <= e),         $sformatf("CSR[3] c=%0d", c));
      chk(csr[2] == (c >= 2 && c <= e + 1),     $sformatf("CSR[2] c=%0d", c));
      chk(csr[1] == (c >= 3 && c <= e + 2),     $sformatf("CSR[1] c=%0d", c));
      chk(csr[0] == (c >= 4 && c <= e + 3),     $sformatf("CSR[0] c=%0d", c));
      chk(rd_en == csr[3] && wr_en == csr[0] && us == csr[0] && ur == !csr[0] &&
          bs == (csr[1] | csr[2]) && br == !(csr[1] | csr[2]) && ce == (csr[0] | csr[3]),
          $sformatf("derived signals c=%0d", c));
      chk(done == (c >= e + 4), $sformatf("done c=%0d", c));
      if (csr[3]) chk(int'(j) == jq[s0 + c - 1] && int'(k) == kq[s0 + c - 1] &&
                      int'(hl) == hq[s0 + c - 1], $sformatf("jkhl loop %0d", s0 + c - 1));
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run(0);
    run(1000);
    run(1023);
    // hold: a one-cycle freeze lengthens the run by one cycle
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    start_loop = 0; strt = 1; @(negedge clk); strt = 0;
    repeat (500) @(negedge clk);
    hold = 1; @(negedge clk); hold = 0;
    begin
      automatic int c = 502;
      while (!done && c < 2000) begin @(negedge clk); c++; end
      chk(c == 1028 + 1, $sformatf("held run done at %0d", c));
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
