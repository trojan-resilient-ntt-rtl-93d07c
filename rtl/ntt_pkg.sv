// ntt_pkg -- constants, types and arithmetic shared by the Secure NTT blocks.
//
// The arithmetic is over the Kyber field: modulus q = 3329 and 12-bit
// coefficients, as in the evaluated configuration (n = 256). The Barrett
// reduction used by the butterfly and by the local-mask multipliers reduces a
// 24-bit product with the constant m = floor(2^24 / q) = 5039 and up to two
// conditional subtractions; the exact reduction form is this design's choice.
//
// ctrl_sig_t bundles the ten control/status signals of the NTT in the bit
// order of the fault-injector word F_r (F_r[0] gates rd_en ... F_r[9] gates
// uv_strt), so that "F_r AND signals" is a single bitwise AND.
package ntt_pkg;

  localparam int unsigned Q     = 3329;   // Kyber modulus
  localparam int unsigned CW    = 12;     // coefficient width
  localparam int unsigned OMEGA_256 = 17; // primitive 256-th root of unity mod Q
  localparam int unsigned BARRETT_K = 24;
  localparam int unsigned BARRETT_M = (1 << BARRETT_K) / Q;  // 5039
  localparam int unsigned PIPE_DEPTH = 5; // pipeline stages of one butterfly
  localparam int unsigned CNT_W = 16;     // width of the fault/run counters

  typedef logic [CW-1:0] coef_t;

  // Ten control/status signals, packed so that bit i is gated by F_r[i].
  typedef struct packed {
    logic uv_strt;       // [9]
    logic uv_rst;        // [8]
    logic barrett_done;  // [7]
    logic barrett_strt;  // [6]
    logic barrett_rst;   // [5]
    logic ubuff_rst;     // [4]
    logic ctrl_rst;      // [3]
    logic polymem_ce;    // [2]
    logic wr_en;         // [1]
    logic rd_en;         // [0]
  } ctrl_sig_t;

  // Correction measures of the adaptive fault correction.
  typedef enum logic [1:0] {
    MEAS_NONE     = 2'd0,
    MEAS_REPEAT   = 2'd1,  // repeat previous loop
    MEAS_RELOAD   = 2'd2,  // reload same PR bitstream, then repeat
    MEAS_RELOCATE = 2'd3   // relocate to another PR region, then repeat
  } measure_t;

  // x mod Q for any 24-bit x (the estimate leaves a remainder below 3Q).
  function automatic coef_t barrett_reduce(input logic [23:0] x);
    logic [36:0] prod;
    logic [12:0] t;
    logic [24:0] r;
    prod = 37'(x) * 37'(BARRETT_M);
    t    = prod[36:BARRETT_K];
    r    = 25'(x) - 25'(t) * 25'(Q);
    if (r >= 25'(Q)) r = r - 25'(Q);
    if (r >= 25'(Q)) r = r - 25'(Q);
    return coef_t'(r);
  endfunction

  function automatic coef_t mod_add(input coef_t a, input coef_t b);
    logic [CW:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= (CW+1)'(Q)) s = s - (CW+1)'(Q);
    return coef_t'(s);
  endfunction

  function automatic coef_t mod_sub(input coef_t a, input coef_t b);
    logic [CW:0] s;
    s = {1'b0, a} + (CW+1)'(Q) - {1'b0, b};
    if (s >= (CW+1)'(Q)) s = s - (CW+1)'(Q);
    return coef_t'(s);
  endfunction

  function automatic coef_t mod_mul(input coef_t a, input coef_t b);
    return barrett_reduce(24'(a) * 24'(b));
  endfunction

  // Primitive n-th root of unity for n dividing 256: 17^(256/n) mod Q.
  function automatic coef_t omega_n(input int unsigned n);
    coef_t w;
    w = coef_t'(1);
    for (int unsigned i = 0; i < 256 / n; i++) w = mod_mul(w, coef_t'(OMEGA_256));
    return w;
  endfunction

endpackage
