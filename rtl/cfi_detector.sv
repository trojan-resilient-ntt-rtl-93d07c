// cfi_detector -- Control Flow Integrity checker with its own Right Shift
// Register (RSR).
//
// The RSR copies the CSR's behaviour without sharing any logic with it:
// RSR[3] is the rd_en signal as delivered to the polynomial memory
// (buffered, as in Fig. 2) and RSR[2:0] are three flip-flops that shift it
// right every cycle. In a fault-free run RSR equals the CSR of the CTRL
// unit in every cycle. The checker compares the delivered control/status
// signals (after any tampering) with the CSR and the RSR:
//   barrett_cfi_fault unless  barrett_strt == ~barrett_rst
//                         and barrett_strt == CSR[1] | CSR[2]
//                         and barrett_strt == RSR[1] | RSR[2]
//                         and barrett_done == wr_en
//   polymem_cfi_fault unless  rd_en == RSR[3] and wr_en == RSR[0]
//                         and polymem_ce == RSR[0] | RSR[3]
//   uv_cfi_fault      unless  CSR[3] == RSR[3] and CSR[0] == RSR[0]
//                         and uv_strt == ~uv_rst
// (one uv flag serves uv_add and uv_sub, which share their controls).
// The rules are the paper's; its equations are read here as equalities,
// e.g. "barrett_strt = CSR[1] OR CSR[2]" rather than "CSR[1] OR CSR[2] = 1".
// The paper combines the flags "by an AND operation"; since each flag is
// active high, this design raises cfi_fault when ANY flag is set (an AND of
// the active-low "no fault" terms). The flags are combinational, so a fault
// is flagged in the cycle it occurs; the RSR is cleared by rst.
module cfi_detector
  import ntt_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  ctrl_sig_t sig,     // delivered control/status signals
  input  logic [3:0] csr,    // CSR of the CTRL unit
  output logic [3:0] rsr,
  output logic      barrett_cfi_fault,
  output logic      polymem_cfi_fault,
  output logic      uv_cfi_fault,
  output logic      cfi_fault
);
  logic [2:0] rsr_q;

  always_ff @(posedge clk) begin
    if (rst) rsr_q <= '0;
    else     rsr_q <= {sig.rd_en, rsr_q[2:1]};
  end

  assign rsr = {sig.rd_en, rsr_q};

  always_comb begin
    barrett_cfi_fault = !((sig.barrett_strt == !sig.barrett_rst) &&
                          (sig.barrett_strt == (csr[1] | csr[2])) &&
                          (sig.barrett_strt == (rsr[1] | rsr[2])) &&
                          (sig.barrett_done == sig.wr_en));
    polymem_cfi_fault = !((sig.rd_en == rsr[3]) &&
                          (sig.wr_en == rsr[0]) &&
                          (sig.polymem_ce == (rsr[0] | rsr[3])));
    uv_cfi_fault      = !((csr[3] == rsr[3]) &&
                          (csr[0] == rsr[0]) &&
                          (sig.uv_strt == !sig.uv_rst));
    cfi_fault = barrett_cfi_fault | polymem_cfi_fault | uv_cfi_fault;
  end
endmodule
