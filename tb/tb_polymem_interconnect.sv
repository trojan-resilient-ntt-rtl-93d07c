// tb_polymem_interconnect -- routing of the selected region's signals,
// write suppression and commit pulses, the input-polynomial copy and the
// N-cycle restore sequence through the memory's host port.
module tb_polymem_interconnect;
  import ntt_pkg::*;
  localparam int M = 8, N = 256;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic [2:0] sel = 0;
  logic [6:0] cj [M], ck [M], j, k;
  logic [7:0] chl [M], hl, mha, ha = 0;
  logic crd [M], cwr [M], cce [M], rd_en, wr_en, ce, mhwe, hwe = 0;
  coef_t cu [M], cv [M], d0, d1, mhwd, hwd = 0;
  logic suppress = 0, commit, restore = 0, rbusy;
  coef_t ref_in [N];
  int checks = 0, failures = 0;

  polymem_interconnect #(.M(M), .N(N)) dut (.clk, .rst, .sel, .core_j(cj), .core_k(ck), .core_hl(chl),
    .core_rd_en(crd), .core_wr_en(cwr), .core_ce(cce), .core_upv(cu), .core_umv(cv),
    .j, .k, .hl, .rd_en, .wr_en, .ce, .din_k0(d0), .din_k1(d1),
    .mem_host_we(mhwe), .mem_host_addr(mha), .mem_host_wdata(mhwd),
    .host_we(hwe), .host_addr(ha), .host_wdata(hwd), .suppress, .commit, .restore, .restore_busy(rbusy));

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst = 0;
    // load the input polynomial through the host port
    for (int a = 0; a < N; a++) begin
      hwe = 1; ha = 8'(a); hwd = coef_t'($urandom_range(0, 3328)); ref_in[a] = hwd;
      #1 chk(mhwe && mha == ha && mhwd == hwd, "host write passes through");
      @(negedge clk);
    end
    hwe = 0;
    // routing and suppression
    for (int t = 0; t < 2000; t++) begin
      sel = 3'($urandom); suppress = ($urandom_range(0, 3) == 0);
      for (int i = 0; i < M; i++) begin
        cj[i] = 7'($urandom); ck[i] = 7'($urandom); chl[i] = 8'($urandom);
        crd[i] = 1'($urandom); cwr[i] = 1'($urandom); cce[i] = 1'($urandom);
        cu[i] = coef_t'($urandom); cv[i] = coef_t'($urandom);
      end
      #1;
      chk(j == cj[sel] && k == ck[sel] && hl == chl[sel] && rd_en == crd[sel] && ce == cce[sel]
          && d0 == cu[sel] && d1 == cv[sel], "routing");
      chk(wr_en == (cwr[sel] && !suppress) && commit == (wr_en && ce), "suppression/commit");
      @(negedge clk);
    end
    // restore: N cycles, every address written once from the copy
    restore = 1; @(negedge clk); restore = 0;
    for (int a = 0; a < N; a++) begin
      chk(rbusy && mhwe && int'(mha) == a && mhwd == ref_in[a], $sformatf("restore addr %0d", a));
      // host writes during restore must not change the copy
      hwe = 1; ha = 8'(a); hwd = 0;
      @(negedge clk);
    end
    hwe = 0;
    chk(!rbusy, "restore ends after N cycles");
    restore = 1; @(negedge clk); restore = 0;
    for (int a = 0; a < N; a++) begin
      chk(mhwd == ref_in[a], "copy unchanged by host writes during restore");
      @(negedge clk);
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
