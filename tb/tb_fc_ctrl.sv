// tb_fc_ctrl -- the correction controller driven by an emulated NTT:
// start sequence, completion count NR, repeat / reload / relocate choice at
// the thresholds for cfi faults, the ccc path with input restore, write
// suppression, and the pr_req/pr_ack handshake.
module tb_fc_ctrl;
  import ntt_pkg::*;
  localparam int M = 8;
  localparam int RELD = 4, RELC = 8;   // small thresholds to keep the run short
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic host_start = 0, cfi = 0, ccc = 0, cdone = 0, rbusy = 0, ack = 0;
  logic [2:0] sel = 0, pr_core;
  logic ntt_rst, ntt_strt, suppress, resume_clr, restore, pr_req, busy, done;
  measure_t pr_kind, last_measure;
  logic [15:0] nr [M], n_cfi [M], n_ccc [M], n_meas [4];
  int checks = 0, failures = 0;

  fc_ctrl #(.M(M), .CFI_TH_RELD(RELD), .CFI_TH_RELC(RELC), .CCC_TH_RELD(RELD), .CCC_TH_RELC(RELC)) dut (
    .clk, .rst, .host_start, .sel, .cfi_fault(cfi), .ccc_fault(ccc), .core_done(cdone),
    .restore_busy(rbusy), .pr_ack(ack), .ntt_rst, .ntt_strt, .suppress, .resume_clr, .restore,
    .pr_req, .pr_kind, .pr_core, .busy, .done, .last_measure, .nr, .n_cfi, .n_ccc, .n_meas);

  task automatic chk(input bit ok, input string m);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic measure_t expect_m(input int n);
    if (n > RELD && n < RELC) return MEAS_RELOAD;
    if (n > RELC) return MEAS_RELOCATE;
    return MEAS_REPEAT;
  endfunction

  // wait for the start pulse; returns cycles waited
  task automatic wait_start(output int w);
    w = 0;
    while (!ntt_strt) begin @(negedge clk); w++; end
    chk(!ntt_rst && busy, "start pulse with reset released");
    @(negedge clk);
  endtask

  // answer a pending PR request, optionally moving the selection
  task automatic serve_pr(input measure_t k, input logic [2:0] newsel);
    int w = 0;
    while (!pr_req && w < 20) begin @(negedge clk); w++; end
    chk(pr_req && pr_kind == k, $sformatf("pr_req kind %0d expected %0d", pr_kind, k));
    chk(ntt_rst && suppress, "instance held in reset, writes blocked while waiting");
    repeat (3) @(negedge clk);
    chk(pr_req, "request held until acknowledged");
    sel = newsel; ack = 1; @(negedge clk); ack = 0;
  endtask

  task automatic finish_run;
    int w;
    repeat (5) begin chk(!suppress, "writes enabled in run"); @(negedge clk); end
    cdone = 1; @(negedge clk); cdone = 0;
    w = 0;
    while (!done && w < 10) begin @(negedge clk); w++; end
    chk(done && !busy, "done after a clean end");
  endtask

  initial begin
    int w;
    repeat (2) @(negedge clk); rst = 0;
    @(negedge clk);
    chk(!busy && ntt_rst && suppress, "idle");
    // clean run
    host_start = 1; @(negedge clk); host_start = 0;
    wait_start(w);
    chk(w == 1, $sformatf("one reset cycle before start, got %0d", w));
    finish_run();
    chk(nr[0] == 1, "NR incremented");
    // cfi faults on region 0 until relocation
    host_start = 1; @(negedge clk); host_start = 0;
    wait_start(w);
    for (int n = 1; n <= RELC + 1; n++) begin
      automatic measure_t m = expect_m(n);
      @(negedge clk);
      cfi = 1; #1 chk(suppress, "write blocked in the fault cycle");
      @(negedge clk); cfi = 0;
      chk(int'(n_cfi[0]) == n && last_measure == m, $sformatf("cfi n=%0d measure %0d exp %0d", n, last_measure, m));
      chk(pr_core == 0, "faulty region reported");
      if (m == MEAS_RELOAD)   serve_pr(MEAS_RELOAD, 0);
      if (m == MEAS_RELOCATE) serve_pr(MEAS_RELOCATE, 3);
      wait_start(w);
    end
    chk(sel == 3, "relocated");
    chk(int'(n_meas[MEAS_REPEAT]) == RELD + 1 && int'(n_meas[MEAS_RELOAD]) == RELC - RELD - 1
        && int'(n_meas[MEAS_RELOCATE]) == 1, "measure counts");
    finish_run();
    chk(nr[3] == 1 && nr[0] == 1, "NR per region");
    // ccc fault: restore then rerun from loop 0
    host_start = 1; @(negedge clk); host_start = 0;
    wait_start(w);
    repeat (3) @(negedge clk);
    cdone = 1; ccc = 1; @(negedge clk); cdone = 0; ccc = 1;
    w = 0;
    while (!restore && w < 10) begin
      if (resume_clr) chk(1, "resume cleared");
      @(negedge clk); w++;
    end
    ccc = 0;
    chk(restore && n_ccc[3] == 1 && last_measure == MEAS_REPEAT, "ccc -> restore");
    chk(ntt_rst && suppress, "instance stopped during restore");
    @(negedge clk);
    rbusy = 1; repeat (20) begin chk(!ntt_strt, "no start while restoring"); @(negedge clk); end
    rbusy = 0;
    wait_start(w);
    finish_run();
    chk(nr[3] == 2, "rerun counted");
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
