// tb_poly_mem -- random traffic against a reference array: two synchronous
// read ports gated by ce & rd_en, two write ports gated by ce & wr_en, and
// the host port.
module tb_poly_mem;
  import ntt_pkg::*;
  localparam int N = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ce = 0, rd = 0, wr = 0, hwe = 0;
  logic [7:0] ar0 = 0, ar1 = 0, aw0 = 0, aw1 = 1, ha = 0;
  coef_t d0 = 0, d1 = 0, q0, q1, hwd = 0, hrd;
  coef_t ref_m [N];
  int checks = 0, failures = 0;
  poly_mem #(.N(N)) dut (.clk, .ce, .rd_en(rd), .wr_en(wr), .addr_rd_k0(ar0), .addr_rd_k1(ar1),
    .addr_wr_k0(aw0), .addr_wr_k1(aw1), .din_k0(d0), .din_k1(d1), .dout_k0(q0), .dout_k1(q1),
    .host_we(hwe), .host_addr(ha), .host_wdata(hwd), .host_rdata(hrd));
  initial begin
    coef_t e0, e1;
    // load through the host port
    for (int i = 0; i < N; i++) begin
      @(negedge clk); hwe = 1; ha = 8'(i); hwd = coef_t'($urandom_range(0, 3328)); ref_m[i] = hwd;
    end
    @(negedge clk); hwe = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ce = $urandom_range(0, 3) != 0; rd = $urandom_range(0, 1); wr = $urandom_range(0, 1);
      ar0 = 8'($urandom); ar1 = 8'($urandom);
      aw0 = 8'($urandom); aw1 = aw0 ^ 8'h80;
      d0 = coef_t'($urandom_range(0, 3328)); d1 = coef_t'($urandom_range(0, 3328));
      e0 = q0; e1 = q1;
      if (ce && rd) begin e0 = ref_m[ar0]; e1 = ref_m[ar1]; end
      if (ce && wr) begin ref_m[aw0] = d0; ref_m[aw1] = d1; end
      @(posedge clk); #1;
      checks += 2;
      if (q0 != e0 || q1 != e1) begin failures++; $display("FAIL t=%0d", t); end
    end
    @(negedge clk); ce = 0;
    for (int i = 0; i < N; i++) begin
      ha = 8'(i); @(posedge clk); #1;
      checks++;
      if (hrd != ref_m[i]) begin failures++; $display("FAIL host read %0d", i); end
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
