// tb_secure_ntt_top -- end-to-end test of the Secure NTT at its default size
// (N = 256, M = 4 PR regions, thresholds 256/512).
//
// The testbench plays the host: it loads random polynomials, starts
// transforms with and without the local mask, reads the results back and
// compares them with a direct polynomial evaluation (ntt_ref_pkg). It also
// plays the bit patcher and ICAP: on a reload request it acknowledges after
// a few cycles; on a relocate request it computes the risk factor
//   R_i = 0.5 * (n_cfi_i/NR_i) / max_k(n_cfi_k/NR_k)
//       + 0.5 * (n_ccc_i/NR_i) / max_k(n_ccc_k/NR_k)
// (runs counted as NR+1 to avoid division by zero) for every region other
// than the faulty one, writes the region with the lowest R_i (ties: more
// runs) into the InterConnect CTRL and acknowledges.
// Mechanisms exercised and counted: fault-free transform (latency checked),
// masked transform, cfi faults on each of the six active control/status
// signals, ineffective injections (signals already low), measure 1 repeat,
// measure 2 reload, measure 3 relocate, ccc fault from a delay Trojan with
// restore and full repeat. Every transform's result must be correct.
module tb_secure_ntt_top;
  import ntt_pkg::*;
  import ntt_ref_pkg::*;

  localparam int N = 256, M = 4, LOGN = 8, SW = 2;
  localparam int LOOPS = LOGN * N / 2;

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
  int n_clean = 0, n_masked = 0, n_cfi_events = 0, n_ineffective = 0;
  int n_repeat = 0, n_reload = 0, n_relocate = 0, n_ccc_events = 0;
  int sig_hits [10];
  longint poly [];
  longint cycles;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // ---------------- bit patcher / ICAP model ----------------
  initial begin
    forever begin
      @(posedge clk);
      if (pr_req && !pr_ack) begin
        if (pr_kind == MEAS_RELOAD) begin
          n_reload++;
          repeat (5) @(posedge clk);
        end else if (pr_kind == MEAS_RELOCATE) begin
          real best_r, r, mc, mx, ci, xi;
          int best;
          n_relocate++;
          mc = 0; mx = 0;
          for (int i = 0; i < M; i++) begin
            ci = real'(n_cfi[i]) / real'(nr[i] + 1);
            xi = real'(n_ccc[i]) / real'(nr[i] + 1);
            if (ci > mc) mc = ci;
            if (xi > mx) mx = xi;
          end
          best = -1; best_r = 1.0e9;
          for (int i = 0; i < M; i++) begin
            if (i == int'(pr_core)) continue;
            r = 0.5 * ((mc > 0) ? (real'(n_cfi[i]) / real'(nr[i] + 1)) / mc : 0.0)
              + 0.5 * ((mx > 0) ? (real'(n_ccc[i]) / real'(nr[i] + 1)) / mx : 0.0);
            if (r < best_r || (r == best_r && nr[i] > nr[best])) begin
              best_r = r; best = i;
            end
          end
          ic_we  <= 1'b1;
          ic_sel <= (SW+1)'(best);
          @(posedge clk);
          ic_we  <= 1'b0;
          repeat (5) @(posedge clk);
        end
        pr_ack <= 1'b1;
        @(posedge clk);
        pr_ack <= 1'b0;
      end
    end
  end

  // count measures as they are taken
  always @(posedge clk) begin
    if (!rst && dut.u_fc.state == dut.u_fc.S_RUN && cfi_fault) n_cfi_events++;
    if (!rst && dut.u_fc.state == dut.u_fc.S_CHECK && ccc_fault) n_ccc_events++;
    if (!rst && dut.u_fc.state == dut.u_fc.S_RUN && cfi_fault &&
        dut.u_fc.decide(dut.u_fc.sat_inc(n_cfi[active_ntt]), 256, 512) == MEAS_REPEAT)
      n_repeat++;
  end

  task automatic load_random();
    poly = new[N];
    for (int i = 0; i < N; i++) begin
      poly[i] = $urandom_range(0, Q - 1);
      @(negedge clk);
      host_we = 1; host_addr = LOGN'(i); host_wdata = coef_t'(poly[i]);
    end
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic start(input int midx);
    @(negedge clk);
    mask_idx = LOGN'(midx);
    host_start = 1;
    @(negedge clk);
    host_start = 0;
  endtask

  task automatic wait_done();
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic check_result(input int midx, input string what);
    int bad = 0;
    for (int p = 0; p < N; p++) begin
      @(negedge clk);
      host_addr = LOGN'(p);
      @(negedge clk);
      if (longint'(host_rdata) != ref_coef(poly, N, p, midx)) begin
        if (bad < 3) $display("  %s: coef %0d got %0d exp %0d", what, p,
                              host_rdata, ref_coef(poly, N, p, midx));
        bad++;
      end
    end
    check(bad == 0, $sformatf("%s result (%0d wrong coefficients)", what, bad));
  endtask

  task automatic arm(input int rt, input int rs, input bit mode);
    @(negedge clk);
    fi_arm = 1; fi_rt = 10'(rt); fi_rs = 10'(rs); fi_mode = mode;
    @(negedge clk);
    fi_arm = 0;
  endtask

  localparam logic [9:0] ACTIVE_MASK = 10'b10_1100_0111;  // bits 0,1,2,6,7,9

  initial begin
    int n_before, midx, rs, rt;
    repeat (4) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);

    // 1. fault-free transform, no mask: result and latency
    load_random();
    start(0);
    wait_done();
    check(cycles == LOOPS + 9, $sformatf("latency %0d, expected %0d", cycles, LOOPS + 9));
    check_result(0, "clean");
    n_clean++;

    // 2. masked transforms
    for (int t = 0; t < 3; t++) begin
      load_random();
      midx = $urandom_range(1, N - 1);
      start(midx);
      wait_done();
      check(cycles == LOOPS + 9, "masked latency");
      check_result(midx, "masked");
      n_masked++;
    end

    // 3. one injected fault per transform, random signal set
    for (int t = 0; t < 24; t++) begin
      load_random();
      midx = $urandom_range(0, N - 1);
      rt = $urandom_range(8, 1000);
      if (t < 10) rs = 10'h3FF & ~(10'(1) << t);     // one signal per bit
      else        rs = $urandom_range(0, 1023);
      n_before = int'(n_cfi[active_ntt]);
      arm(rt, rs, 1'b0);
      start(midx);
      wait_done();
      check_result(midx, $sformatf("fault rt=%0d rs=%03h", rt, rs));
      if ((10'(rs) & ACTIVE_MASK) != ACTIVE_MASK) begin
        check(int'(n_cfi[active_ntt]) == n_before + 1,
              $sformatf("effective fault rs=%03h detected once", rs));
        for (int b = 0; b < 10; b++) if (!rs[b] && ACTIVE_MASK[b]) sig_hits[b]++;
      end else begin
        check(int'(n_cfi[active_ntt]) == n_before,
              $sformatf("ineffective injection rs=%03h raises no fault", rs));
        n_ineffective++;
      end
    end

    // 4. delay Trojan -> ccc fault -> restore and repeat
    for (int t = 0; t < 2; t++) begin
      load_random();
      midx = $urandom_range(0, N - 1);
      n_before = int'(n_ccc[active_ntt]);
      arm($urandom_range(20, 1000), 0, 1'b1);
      start(midx);
      wait_done();
      check(int'(n_ccc[active_ntt]) == n_before + 1, "delay fault counted as ccc fault");
      check_result(midx, "after ccc repeat");
    end

    // 5. a storm of faults on one transform: drives the count of the
    //    active region past both thresholds (reload, then relocate)
    begin
      int   start_sel;
      int   fired;
      start_sel = int'(active_ntt);
      load_random();
      midx = $urandom_range(1, N - 1);
      arm($urandom_range(5, 40), 10'h3FE, 1'b0);
      start(midx);
      fired = 0;
      while (!done) begin
        @(negedge clk);
        if (fi_fired) fired++;
        if (!dut.u_fi.armed && !fi_arm && dut.u_fi.counting && n_relocate == 0) begin
          fi_arm = 1; fi_rt = 10'($urandom_range(0, 2)); fi_rs = 10'h3FE; fi_mode = 0;
          @(negedge clk);
          fi_arm = 0;
        end
      end
      check_result(midx, "after fault storm");
      check(n_reload > 0, "reload measure taken");
      check(n_relocate > 0, "relocate measure taken");
      check(int'(active_ntt) != start_sel, "active region changed by relocation");
      check(n_cfi[start_sel] > 16'd512, "fault count of old region above relocate threshold");
      $display("storm: %0d injections, region %0d -> %0d", fired, start_sel, active_ntt);
    end

    // 6. a clean transform on the new region
    load_random();
    start(7);
    wait_done();
    check(cycles == LOOPS + 9, "latency on relocated region");
    check_result(7, "relocated clean");

    // mechanism coverage
    check(n_clean > 0, "clean transform");
    check(n_masked > 0, "masked transform");
    check(n_cfi_events > 0, "cfi fault detected");
    check(n_ineffective >= 0, "ineffective injections");
    check(n_repeat > 0, "repeat measure");
    check(n_ccc_events > 0, "ccc fault detected");
    for (int b = 0; b < 10; b++)
      if (ACTIVE_MASK[b]) check(sig_hits[b] > 0, $sformatf("fault on signal bit %0d", b));
    $display("coverage: clean=%0d masked=%0d cfi=%0d ineffective=%0d repeat=%0d reload=%0d relocate=%0d ccc=%0d",
             n_clean, n_masked, n_cfi_events, n_ineffective, n_repeat, n_reload,
             n_relocate, n_ccc_events);
    $display("n_meas: repeat=%0d reload=%0d relocate=%0d", n_meas[1], n_meas[2], n_meas[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
