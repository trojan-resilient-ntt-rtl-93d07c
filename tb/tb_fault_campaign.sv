// tb_fault_campaign -- fault-injection campaign on the full-size design.
//
// Runs repeated transforms of random polynomials (n = 256, q = 3329, as in
// the Kyber-512/768/1024 NTT) with a random local mask, and before each run
// arms the fault injector with random R_t and R_s in [0, 1023]: one attack
// per transform, F_r = R_s in the attacked cycle. Every eighth run uses the
// delay attack (one-cycle stall of the CTRL unit) instead.
// For every run it checks:
//   * the result read back equals the reference transform (the fault was
//     corrected, or did not matter);
//   * an attack that changed at least one delivered control line (gated
//     word differs from the raw word in the attacked cycle) was detected,
//     by cfi_fault or ccc_fault;
//   * an attack that changed nothing raised no fault (no false alarm);
//   * every delay attack raised ccc_fault.
// The detection and correction rates are printed at the end and must both
// be 100 %. Parameters are the top's defaults; a host model acknowledges
// reload/relocate requests (relocation goes to the next region); with
// 2000 runs the fault counts pass both thresholds, so reload and relocate
// happen too, and the campaign continues on the new region.
module tb_fault_campaign;
  import ntt_pkg::*;
  import ntt_ref_pkg::*;

  localparam int N = 256, M = 4, LOGN = 8, SW = 2;
  localparam int RUNS = 2000;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic            host_we = 0, host_start = 0;
  logic [LOGN-1:0] host_addr = 0, mask_idx = 0;
  coef_t           host_wdata = 0, host_rdata;
  logic            busy, done;
  logic            ic_we = 0;
  logic [SW:0]     ic_sel = 0;
  logic [SW-1:0]   active_ntt, pr_core;
  logic            pr_req, pr_ack = 0;
  measure_t        pr_kind, last_measure;
  logic [CNT_W-1:0] nr [M], n_cfi [M], n_ccc [M], n_meas [4];
  logic            fi_arm = 0, fi_mode = 0, fi_fired;
  logic [9:0]      fi_rt = 0, fi_rs = '1;
  logic            cfi_fault, ccc_fault;

  secure_ntt_top dut (.*);

  int checks = 0, failures = 0;
  int n_injected = 0, n_effective = 0, n_detected = 0, n_corrected = 0, n_delay = 0;
  bit effective, clr_eff = 0;
  longint poly [];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // the attacked cycle: did the gated word differ from the raw word?
  bit eff_g [M];
  for (genvar g = 0; g < M; g++) begin : g_probe
    always @(posedge clk) begin
      if (clr_eff) eff_g[g] <= 1'b0;
      else if (!rst && dut.g_ntt[g].u_ntt.fr != 10'h3FF &&
               dut.g_ntt[g].u_ntt.sig != dut.g_ntt[g].u_ntt.raw)
        eff_g[g] <= 1'b1;
    end
  end
  always_comb begin
    effective = 1'b0;
    for (int g = 0; g < M; g++) effective |= eff_g[g];
  end

  // host side: acknowledge reconfiguration requests
  initial begin
    forever begin
      @(posedge clk);
      if (pr_req && !pr_ack) begin
        if (pr_kind == MEAS_RELOCATE) begin
          ic_we  <= 1'b1;
          ic_sel <= (SW+1)'((int'(pr_core) + 1) % M);
          @(posedge clk);
          ic_we  <= 1'b0;
        end
        repeat (3) @(posedge clk);
        pr_ack <= 1'b1;
        @(posedge clk);
        pr_ack <= 1'b0;
      end
    end
  end

  function automatic int faults_total();
    int s = 0;
    for (int i = 0; i < M; i++) s += int'(n_cfi[i]) + int'(n_ccc[i]);
    return s;
  endfunction

  initial begin
    int midx, rt, rs, n_before, n_ccc_before, bad;
    bit delay;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);
    for (int run = 0; run < RUNS; run++) begin
      poly = new[N];
      for (int i = 0; i < N; i++) begin
        poly[i] = $urandom_range(0, Q - 1);
        @(negedge clk);
        host_we = 1; host_addr = LOGN'(i); host_wdata = coef_t'(poly[i]);
      end
      @(negedge clk);
      host_we = 0;
      midx  = $urandom_range(0, N - 1);
      rt    = $urandom_range(0, 1023);
      rs    = $urandom_range(0, 1023);
      delay = (run % 8 == 7);
      n_before = faults_total();
      n_ccc_before = int'(n_ccc[active_ntt]);
      @(negedge clk);
      fi_arm = 1; fi_rt = 10'(rt); fi_rs = 10'(rs); fi_mode = delay;
      @(negedge clk);
      fi_arm = 0;
      clr_eff = 1; @(negedge clk); clr_eff = 0;
      mask_idx = LOGN'(midx); host_start = 1;
      @(negedge clk);
      host_start = 0;
      while (!done) @(negedge clk);
      n_injected++;
      if (delay) begin
        n_delay++;
        n_effective++;
        check(int'(n_ccc[active_ntt]) > n_ccc_before, $sformatf("run %0d: delay at %0d not caught", run, rt));
        if (faults_total() > n_before) n_detected++;
      end else if (effective) begin
        n_effective++;
        check(faults_total() > n_before, $sformatf("run %0d: rt=%0d rs=%03h changed a line but was not detected", run, rt, rs));
        if (faults_total() > n_before) n_detected++;
      end else begin
        check(faults_total() == n_before, $sformatf("run %0d: rt=%0d rs=%03h changed nothing but raised a fault", run, rt, rs));
      end
      bad = 0;
      for (int p = 0; p < N; p++) begin
        @(negedge clk);
        host_addr = LOGN'(p);
        @(negedge clk);
        if (longint'(host_rdata) != ref_coef(poly, N, p, midx)) bad++;
      end
      check(bad == 0, $sformatf("run %0d: rt=%0d rs=%03h delay=%0d: %0d wrong coefficients", run, rt, rs, delay, bad));
      if (bad == 0) n_corrected++;
    end
    $display("campaign: %0d attacks, %0d changed a control line (%0d delays), %0d detected, %0d results correct",
             n_injected, n_effective, n_delay, n_detected, n_corrected);
    $display("measures: repeat=%0d reload=%0d relocate=%0d", n_meas[MEAS_REPEAT], n_meas[MEAS_RELOAD],
             n_meas[MEAS_RELOCATE]);
    check(n_effective > RUNS / 2, "most attacks hit an active line");
    check(n_meas[MEAS_RELOAD] > 0 && n_meas[MEAS_RELOCATE] > 0, "reload and relocate happened");
    check(n_detected == n_effective, "100% detection");
    check(n_corrected == RUNS, "100% correction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUNS * 2000 + 10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
