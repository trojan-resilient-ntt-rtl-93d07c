// tb_ntt_core -- one NTT instance with the polynomial memory, twiddle ROM
// and address generator around it, at N = 256. Checks: done exactly 1028
// cycles after the start pulse (log2(n)*n/2 + 4), the transform result
// against direct polynomial evaluation with and without the local mask, no
// fault flag in clean runs, a cfi fault flagged in the cycle a control
// signal is blocked, and a ccc fault after a one-cycle CTRL hold.
module tb_ntt_core;
  import ntt_pkg::*;
  import ntt_ref_pkg::*;
  localparam int N = 256, LOGN = 8, LOOPS = 1024;
  logic clk = 0, rst = 1, strt = 0, hold = 0;
  always #5 clk = ~clk;
  logic [9:0] fr = '1;
  logic [10:0] start_loop = 0;
  coef_t a0, a1, upv, umv, wj, wr, hwd = 0, hrd;
  logic [6:0] j, k;
  logic [7:0] hl, rj, mask = 0, ha = 0, r0, r1, w0, w1;
  logic rd_en, wr_en, ce, done, busy, bf, pf, uf, cf, ccf, hwe = 0;
  int checks = 0, failures = 0;
  longint poly [];

  ntt_core #(.N(N)) dut (.clk, .ntt_rst(rst), .ntt_strt(strt), .start_loop, .fr, .hold,
    .a_k0(a0), .a_k1(a1), .j, .k, .hl, .rd_en, .wr_en, .ce, .u_plus_v(upv), .u_minus_v(umv),
    .reversed_j(rj), .w_j(wj), .w_r(wr), .done, .busy, .barrett_cfi_fault(bf),
    .polymem_cfi_fault(pf), .uv_cfi_fault(uf), .cfi_fault(cf), .ccc_fault(ccf));
  addr_gen #(.N(N)) u_ag (.clk, .rst, .j, .k, .hl, .addr_rd_k0(r0), .addr_rd_k1(r1),
                          .addr_wr_k0(w0), .addr_wr_k1(w1));
  poly_mem #(.N(N)) u_pm (.clk, .ce, .rd_en, .wr_en, .addr_rd_k0(r0), .addr_rd_k1(r1),
    .addr_wr_k0(w0), .addr_wr_k1(w1), .din_k0(upv), .din_k1(umv), .dout_k0(a0), .dout_k1(a1),
    .host_we(hwe), .host_addr(ha), .host_wdata(hwd), .host_rdata(hrd));
  w_mem #(.N(N)) u_wm (.addr_j(rj), .addr_r(mask), .w_j(wj), .w_r(wr));

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic load();
    poly = new[N];
    for (int i = 0; i < N; i++) begin
      @(negedge clk); hwe = 1; ha = 8'(i); poly[i] = $urandom_range(0, 3328); hwd = coef_t'(poly[i]);
    end
    @(negedge clk); hwe = 0;
  endtask

  // returns cycles from start to done; fault_kind 0 none, 1 block bit b at cycle fc, 2 hold at fc
  task automatic run(input int m, input int fault_kind, input int b, input int fc,
                     output int cyc, output bit saw_cfi, output bit saw_ccc);
    mask = 8'(m);
    @(negedge clk); rst = 1; @(negedge clk); rst = 0;
    strt = 1; @(negedge clk); strt = 0;
    cyc = 1; saw_cfi = 0; saw_ccc = 0;
    while (!done && cyc < 3000) begin
      fr = (fault_kind == 1 && cyc == fc) ? ~(10'(1) << b) : '1;
      hold = (fault_kind == 2 && cyc == fc);
      #1;
      if (cf) saw_cfi = 1;
      if (fault_kind == 1 && cyc == fc) chk(cf, $sformatf("blocked bit %0d flagged at once", b));
      @(negedge clk);
      cyc++;
    end
    fr = '1; hold = 0;
    @(negedge clk);
    saw_ccc = ccf;
  endtask

  task automatic check_result(input int m, input string what);
    int bad = 0;
    for (int p = 0; p < N; p++) begin
      ha = 8'(p); @(posedge clk); #1;
      if (longint'(hrd) != ref_coef(poly, N, p, m)) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d wrong coefficients", what, bad));
  endtask

  initial begin
    int cyc, m;
    bit sc, sx;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 3; t++) begin
      load();
      m = (t == 0) ? 0 : $urandom_range(1, 255);
      run(m, 0, 0, 0, cyc, sc, sx);
      chk(cyc == LOOPS + 4, $sformatf("done after %0d cycles, expected 1028", cyc));
      chk(!sc && !sx, "clean run raised a fault flag");
      check_result(m, "transform");
    end
    for (int b = 0; b < 10; b++) begin
      if (!(b inside {0, 1, 2, 6, 7, 9})) continue;
      load();
      run(0, 1, b, $urandom_range(10, 1000), cyc, sc, sx);
      chk(sc, $sformatf("bit %0d fault seen", b));
    end
    load();
    run(0, 2, 0, 600, cyc, sc, sx);
    chk(!sc, "hold is not a control-flow fault");
    chk(sx, "hold raises ccc fault");
    chk(cyc == LOOPS + 5, "hold lengthens run by one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
