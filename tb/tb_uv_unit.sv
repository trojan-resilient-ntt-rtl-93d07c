// tb_uv_unit -- adder and subtractor with local mask against '%' arithmetic,
// including the reset and not-started conditions.
module tb_uv_unit;
  import ntt_pkg::*;
  coef_t u, v, wr, ra, rs;
  logic urst, ustrt;
  int checks = 0, failures = 0;
  uv_unit #(.IS_SUB(1'b0)) dut_a (.uv_rst(urst), .uv_strt(ustrt), .u, .v, .w_r(wr), .res(ra));
  uv_unit #(.IS_SUB(1'b1)) dut_s (.uv_rst(urst), .uv_strt(ustrt), .u, .v, .w_r(wr), .res(rs));
  initial begin
    longint ea, es;
    urst = 0; ustrt = 1;
    for (int t = 0; t < 5000; t++) begin
      u  = coef_t'($urandom_range(0, 3328));
      v  = coef_t'($urandom_range(0, 3328));
      wr = (t < 100) ? coef_t'(1) : coef_t'($urandom_range(0, 3328));
      if (t == 1) begin u = 3328; v = 3328; end
      if (t == 2) begin u = 0; v = 3328; end
      #1;
      ea = ((longint'(u) + longint'(v)) % 3329) * longint'(wr) % 3329;
      es = ((longint'(u) - longint'(v) + 3329) % 3329) * longint'(wr) % 3329;
      checks += 2;
      if (longint'(ra) != ea) begin failures++; $display("FAIL add %0d %0d %0d", u, v, wr); end
      if (longint'(rs) != es) begin failures++; $display("FAIL sub %0d %0d %0d", u, v, wr); end
    end
    u = 5; v = 7; wr = 1;
    urst = 1; #1; checks++; if (ra != 0 || rs != 0) begin failures++; $display("FAIL rst"); end
    urst = 0; ustrt = 0; #1; checks++; if (ra != 0 || rs != 0) begin failures++; $display("FAIL strt"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
