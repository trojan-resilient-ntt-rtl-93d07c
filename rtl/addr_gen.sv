// addr_gen -- poly_mem address generator.
//
// For butterfly (j, k) of a stage with half-length hl the two coefficients
// are k0 = 2*hl*j + k and k1 = k0 + hl. The read addresses are formed
// combinationally in the rd_en cycle; the write addresses are the same
// addresses delayed by WR_DELAY = 3 cycles, the distance between the read
// stage and the write stage of the five-stage pipeline (read, two Barrett
// stages, add/sub + write). The paper shows addr_gen taking k and hl and
// producing these four addresses; it writes k0 = k in Algorithm 1, which
// drops the group offset. This design adds j as an input and uses the
// standard in-place index 2*hl*j + k, which the timing figure (alpha[j+k])
// also suggests. The delay registers are cleared by rst.
module addr_gen #(
  parameter int unsigned N        = 256,
  parameter int unsigned WR_DELAY = 3
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [$clog2(N)-2:0]   j,
  input  logic [$clog2(N)-2:0]   k,
  input  logic [$clog2(N)-1:0]   hl,
  output logic [$clog2(N)-1:0]   addr_rd_k0,
  output logic [$clog2(N)-1:0]   addr_rd_k1,
  output logic [$clog2(N)-1:0]   addr_wr_k0,
  output logic [$clog2(N)-1:0]   addr_wr_k1
);
  localparam int unsigned AW = $clog2(N);
  logic [AW-1:0] k0_pipe [WR_DELAY];
  logic [AW-1:0] k1_pipe [WR_DELAY];

  always_comb begin
    logic [2*AW-1:0] base;
    base       = (2*AW)'(hl) * (2*AW)'(j) * 2;
    addr_rd_k0 = AW'(base) + AW'(k);
    addr_rd_k1 = addr_rd_k0 + hl;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned i = 0; i < WR_DELAY; i++) begin
        k0_pipe[i] <= '0;
        k1_pipe[i] <= '0;
      end
    end else begin
      k0_pipe[0] <= addr_rd_k0;
      k1_pipe[0] <= addr_rd_k1;
      for (int unsigned i = 1; i < WR_DELAY; i++) begin
        k0_pipe[i] <= k0_pipe[i-1];
        k1_pipe[i] <= k1_pipe[i-1];
      end
    end
  end

  assign addr_wr_k0 = k0_pipe[WR_DELAY-1];
  assign addr_wr_k1 = k1_pipe[WR_DELAY-1];
endmodule
