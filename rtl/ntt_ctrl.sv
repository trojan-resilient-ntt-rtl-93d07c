// ntt_ctrl -- CTRL unit: loop counter and 4-bit Control Status Register.
//
// The transform runs NL = log2(N) * N/2 butterfly loops, one per cycle. The
// CSR is a right shift register: a 1 is shifted into CSR[3] for every loop
// issued, and each bit moves one place right per cycle, so the four bits
// mark the four pipeline stages after issue:
//   CSR[3] = rd_en            (memory read of A[k0], A[k1], w_j)
//   CSR[2]                    (Barrett stage 1; "uBuff_strt" in Fig. 1)
//   CSR[1]                    (Barrett stage 2)
//   CSR[0] = wr_en = uv_strt  (add/sub, mask and memory write)
// and the derived signals are
//   barrett_strt = CSR[1] | CSR[2],  barrett_rst = ~(CSR[1] | CSR[2]),
//   polymem_ce   = CSR[0] | CSR[3],  uv_rst      = ~CSR[0].
// The paper writes uv_rst = ~CSR[3] in its equations, but its timing
// diagram and its uv CFI rule (uv_strt = ~uv_rst) need uv_rst = ~CSR[0];
// this design follows the latter. Its timing diagram also labels rd_en as
// CSR[0] and wr_en as CSR[3]; the text and Fig. 1 give the mapping above.
//
// Timing: with ctrl_rst low, a strt pulse in cycle 0 makes rd_en high in
// cycles 1..E, wr_en in cycles 4..E+3, and done rises in cycle E+4 and
// stays high until ctrl_rst; E = NL - start_loop (E = 1024 and done at
// cycle 1028 for N = 256). start_loop lets the fault-correction logic resume
// at a given loop; it is 0 for a fresh transform (this design's addition).
// In each rd_en cycle j, k and hl are those of loop 'loop':
//   stage i = loop / (N/2), hl = N >> (i+1), j = (loop mod N/2) / hl,
//   k = (loop mod N/2) mod hl.
// hold freezes the whole unit for a cycle; it exists only so that a delay
// Trojan (an extra state) can be emulated, and is tied low in normal use.
module ntt_ctrl #(
  parameter  int unsigned N     = 256,
  localparam int unsigned LOGN  = $clog2(N),
  localparam int unsigned LOOPS = LOGN * N / 2,
  localparam int unsigned LW    = $clog2(LOOPS + 1)
) (
  input  logic                         clk,
  input  logic                         ctrl_rst,
  input  logic                         strt,
  input  logic [LW-1:0] start_loop,
  input  logic                         hold,
  output logic [3:0]                   csr,
  output logic [LW-1:0] loop,
  output logic [$clog2(N)-2:0]         j,
  output logic [$clog2(N)-2:0]         k,
  output logic [$clog2(N)-1:0]         hl,
  output logic                         rd_en,
  output logic                         wr_en,
  output logic                         polymem_ce,
  output logic                         barrett_strt,
  output logic                         barrett_rst,
  output logic                         uv_strt,
  output logic                         uv_rst,
  output logic                         busy,
  output logic                         done
);
  logic started;
  logic issue_next;

  always_comb begin
    issue_next = (strt && !started && (start_loop < LW'(LOOPS))) ||
                 (csr[3] && (loop != LW'(LOOPS - 1)));
  end

  always_ff @(posedge clk) begin
    if (ctrl_rst) begin
      csr     <= '0;
      loop    <= '0;
      started <= 1'b0;
      done    <= 1'b0;
    end else if (!hold) begin
      csr <= {issue_next, csr[3:1]};
      if (strt && !started) begin
        loop    <= start_loop;
        started <= 1'b1;
      end else if (csr[3]) begin
        loop <= loop + 1'b1;
      end
      if (started && csr == 4'b0001) done <= 1'b1;
    end
  end

  // Loop index -> (j, k, hl)
  always_comb begin
    logic [LW-1:0]   stage;
    logic [LOGN-2:0] idx;
    int unsigned     sh;
    stage = loop >> (LOGN - 1);
    idx   = (LOGN-1)'(loop);
    sh    = (LOGN - 1) - int'(stage);
    if (stage >= LW'(LOGN)) sh = 0;
    hl = LOGN'(1) << sh;
    j  = idx >> sh;
    k  = idx & ((LOGN-1)'(1 << sh) - 1'b1);
  end

  assign rd_en        = csr[3];
  assign wr_en        = csr[0];
  assign uv_strt      = csr[0];
  assign uv_rst       = ~csr[0];
  assign barrett_strt = csr[1] | csr[2];
  assign barrett_rst  = ~(csr[1] | csr[2]);
  assign polymem_ce   = csr[0] | csr[3];
  assign busy         = started && !done;
endmodule
