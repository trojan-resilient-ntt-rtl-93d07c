// fault_injector -- emulation of hardware-Trojan attacks on the NTT control
// signals.
//
// The injector drives the 10-bit word F_r that is ANDed with the ten
// control/status signals of the active NTT (bit order of ntt_pkg::ctrl_sig_t:
// F_r[0] rd_en, [1] wr_en, [2] polymem_ce, [3] CTRL_rst, [4] uBuff_rst,
// [5] barrett_rst, [6] barrett_strt, [7] barrett_done, [8] uv_rst,
// [9] uv_strt). F_r is all ones except in one cycle: when armed, a cycle
// counter started by each NTT activation (act) reaches R_t, and F_r takes
// the value R_s for the following cycle, blocking every signal whose bit of
// R_s is 0. This follows the paper (R_t and R_s in [0, 1023], F_r loaded
// with R_s at cycle R_t). The one-cycle duration, the one-shot disarm after
// firing and the restart of the count at each activation are this design's
// choices.
// mode = 1 selects a second attack kind used to exercise the clock cycle
// counter: instead of masking signals, the injector raises hold for one
// cycle, which freezes the CTRL unit (a Trojan that adds an extra state).
// The paper names such delay Trojans but does not say how it emulated
// them; this mode is this design's.
module fault_injector (
  input  logic       clk,
  input  logic       rst,
  input  logic       arm,     // load rt/rs/mode and arm (pulse)
  input  logic [9:0] rt,
  input  logic [9:0] rs,
  input  logic       mode,    // 0: F_r masking, 1: one-cycle CTRL hold
  input  logic       act,     // NTT activation (start pulse)
  output logic [9:0] fr,
  output logic       hold,
  output logic       armed,
  output logic       fired    // pulse in the cycle the attack is applied
);
  logic [9:0] rt_q, rs_q;
  logic       mode_q, counting;
  logic [10:0] cnt;
  logic       hit;

  assign hit = armed && counting && (cnt == {1'b0, rt_q});

  always_ff @(posedge clk) begin
    if (rst) begin
      rt_q     <= '0;
      rs_q     <= '1;
      mode_q   <= 1'b0;
      armed    <= 1'b0;
      counting <= 1'b0;
      cnt      <= '0;
      fr       <= '1;
      hold     <= 1'b0;
      fired    <= 1'b0;
    end else begin
      if (arm) begin
        rt_q   <= rt;
        rs_q   <= rs;
        mode_q <= mode;
        armed  <= 1'b1;
      end else if (hit) begin
        armed <= 1'b0;
      end
      if (act) begin
        counting <= 1'b1;
        cnt      <= '0;
      end else if (counting && cnt != '1) begin
        cnt <= cnt + 1'b1;
      end
      fr    <= (hit && !mode_q) ? rs_q : '1;
      hold  <= hit && mode_q;
      fired <= hit;
    end
  end
endmodule
