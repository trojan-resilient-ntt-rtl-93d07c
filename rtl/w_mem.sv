// w_mem -- twiddle-factor ROM (12 x N), combinational read.
//
// Entry t holds w^t mod q, where w is a primitive N-th root of unity mod
// q = 3329 (17 for N = 256). The table is computed at elaboration from that
// formula, so no data file is needed. Two read ports: port j is addressed by
// the bit-reversed group index and gives the butterfly twiddle w_j; port r
// is addressed by the local-mask index and gives the random mask twiddle
// w_r (its inverse w^(N-t) is in the same table). The paper gives the size
// (12 x 256), that the ROM is combinational and that the mask twiddle comes
// from it; the second read port is this design's way of providing w_r.
module w_mem
  import ntt_pkg::*;
#(
  parameter int unsigned N = 256
) (
  input  logic [$clog2(N)-1:0] addr_j,
  input  logic [$clog2(N)-1:0] addr_r,
  output coef_t                w_j,
  output coef_t                w_r
);
  typedef coef_t rom_t [N];

  function automatic rom_t gen_rom();
    rom_t  t;
    coef_t w, p;
    w = omega_n(N);
    p = coef_t'(1);
    for (int unsigned i = 0; i < N; i++) begin
      t[i] = p;
      p    = mod_mul(p, w);
    end
    return t;
  endfunction

  localparam rom_t ROM = gen_rom();

  assign w_j = ROM[addr_j];
  assign w_r = ROM[addr_r];
endmodule
