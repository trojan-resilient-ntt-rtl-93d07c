// bit_reverser -- combinational bit reversal of the butterfly group index j.
//
// The NTT reads its twiddle factor w_j from the twiddle ROM at the
// bit-reversed group index (the "reversed-j" address of the architecture).
// For a transform of length N the group index j has log2(N)-1 bits and the
// ROM holds w^t at address t, so w_mem[bitrev(j)] is the twiddle of group j
// in a Cooley-Tukey transform with natural-order input and bit-reversed
// output. Purely combinational, no clock or control signals (as in the
// paper's component table). The width parameter is this design's.
module bit_reverser #(
  parameter int unsigned WIDTH = 7
) (
  input  logic [WIDTH-1:0] j,
  output logic [WIDTH-1:0] reversed_j
);
  always_comb begin
    for (int unsigned b = 0; b < WIDTH; b++) reversed_j[b] = j[WIDTH-1-b];
  end
endmodule
