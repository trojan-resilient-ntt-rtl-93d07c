// tb_bit_reverser -- exhaustive check of the 7-bit reversal.
module tb_bit_reverser;
  import ntt_ref_pkg::*;
  logic [6:0] j, r;
  int checks = 0, failures = 0;
  bit_reverser #(.WIDTH(7)) dut (.j, .reversed_j(r));
  initial begin
    for (int i = 0; i < 128; i++) begin
      j = 7'(i);
      #1;
      checks++;
      if (int'(r) != bitrev(i, 7)) begin
        failures++;
        $display("FAIL: j=%0d got %0d", i, r);
      end
    end
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
