// tb_w_mem -- every ROM entry must be 17^t mod 3329 on both read ports,
// and the table must have the properties the NTT relies on (w^128 = -1).
module tb_w_mem;
  import ntt_pkg::*;
  import ntt_ref_pkg::*;
  logic [7:0] aj, ar;
  coef_t wj, wr;
  int checks = 0, failures = 0;
  w_mem #(.N(256)) dut (.addr_j(aj), .addr_r(ar), .w_j(wj), .w_r(wr));
  initial begin
    for (int t = 0; t < 256; t++) begin
      aj = 8'(t); ar = 8'(255 - t);
      #1;
      checks += 2;
      if (longint'(wj) != powq(17, t)) begin failures++; $display("FAIL j %0d", t); end
      if (longint'(wr) != powq(17, 255 - t)) begin failures++; $display("FAIL r %0d", t); end
    end
    aj = 8'd128; #1; checks++;
    if (wj != coef_t'(3328)) begin failures++; $display("FAIL: w^128 != -1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
