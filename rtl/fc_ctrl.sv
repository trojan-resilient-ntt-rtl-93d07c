// fc_ctrl -- adaptive fault-correction controller.
//
// Sequences the selected NTT instance and reacts to its fault flags.
// Per instance it keeps the fault table of the bit patcher: number of
// completed runs NR, cfi faults n_cfi and ccc faults n_ccc (16-bit,
// saturating). Each detected fault increments the count n of the instance
// where it occurred and selects a measure with the paper's threshold rules:
//   n > TH_RELD and n < TH_RELC : reload the same PR bitstream, then repeat
//   n > TH_RELC                 : relocate to another PR region, then repeat
//   otherwise                   : repeat previous loop
// (separate thresholds for cfi and ccc faults; 256/512 in the paper).
//
// cfi fault (flagged combinationally by the NTT, checked every cycle of the
// run): writes are suppressed from that very cycle, the instance is reset
// (the results of all loops in flight are discarded) and restarted from the
// first loop whose result was not written (the resume buffer of the Input
// CTRL interconnect). Reload and relocate first raise pr_req with pr_kind
// and wait for pr_ack from the host/ICAP side; for relocate the host writes
// the new selection into the InterConnect CTRL before acknowledging.
// ccc fault (checked when the run ends, or on a stall): the whole transform
// is repeated from loop 0 after the poly_mem interconnect has restored the
// input polynomial from its buffer.
// Timing: host_start -> one reset cycle -> start pulse -> run; done is a
// level that rises when a run ends without a ccc fault and stays high until
// the next host_start. The thresholds and the three measures are the
// paper's; this state machine, the restore on ccc faults and the request/
// acknowledge handshake are this design's (the paper runs the decisions
// partly in host software).
module fc_ctrl
  import ntt_pkg::*;
#(
  parameter  int unsigned M           = 4,
  parameter  int unsigned CFI_TH_RELD = 256,
  parameter  int unsigned CFI_TH_RELC = 512,
  parameter  int unsigned CCC_TH_RELD = 256,
  parameter  int unsigned CCC_TH_RELC = 512,
  localparam int unsigned SW          = (M > 1) ? $clog2(M) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             host_start,
  input  logic [SW-1:0]    sel,
  input  logic             cfi_fault,
  input  logic             ccc_fault,
  input  logic             core_done,
  input  logic             restore_busy,
  input  logic             pr_ack,
  output logic             ntt_rst,
  output logic             ntt_strt,
  output logic             suppress,
  output logic             resume_clr,
  output logic             restore,
  output logic             pr_req,
  output measure_t         pr_kind,
  output logic [SW-1:0]    pr_core,
  output logic             busy,
  output logic             done,
  output measure_t         last_measure,
  output logic [CNT_W-1:0] nr     [M],
  output logic [CNT_W-1:0] n_cfi  [M],
  output logic [CNT_W-1:0] n_ccc  [M],
  output logic [CNT_W-1:0] n_meas [4]   // events per measure_t value
);
  typedef enum logic [2:0] {
    S_IDLE, S_RST, S_START, S_RUN, S_CHECK, S_PR_WAIT, S_RESTORE, S_FINISH
  } state_t;

  state_t state;
  logic   restore_pending, restore_issued;

  function automatic measure_t decide(input logic [CNT_W-1:0] n,
                                      input int unsigned reld,
                                      input int unsigned relc);
    if (n > CNT_W'(reld) && n < CNT_W'(relc)) return MEAS_RELOAD;
    else if (n > CNT_W'(relc))                return MEAS_RELOCATE;
    else                                      return MEAS_REPEAT;
  endfunction

  function automatic logic [CNT_W-1:0] sat_inc(input logic [CNT_W-1:0] x);
    return (x == '1) ? x : x + 1'b1;
  endfunction

  always_comb begin
    ntt_rst  = !(state == S_START || state == S_RUN || state == S_CHECK);
    ntt_strt = (state == S_START);
    suppress = (state != S_RUN) || cfi_fault;
    pr_req   = (state == S_PR_WAIT);
    busy     = (state != S_IDLE);
    restore  = (state == S_RESTORE) && !restore_issued;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state           <= S_IDLE;
      restore_pending <= 1'b0;
      restore_issued  <= 1'b0;
      resume_clr      <= 1'b0;
      done            <= 1'b0;
      pr_kind         <= MEAS_NONE;
      pr_core         <= '0;
      last_measure    <= MEAS_NONE;
      for (int unsigned i = 0; i < M; i++) begin
        nr[i] <= '0; n_cfi[i] <= '0; n_ccc[i] <= '0;
      end
      for (int unsigned i = 0; i < 4; i++) n_meas[i] <= '0;
    end else begin
      resume_clr <= 1'b0;
      unique case (state)
        S_IDLE: if (host_start) begin
          done       <= 1'b0;
          resume_clr <= 1'b1;
          state      <= S_RST;
        end
        S_RST:   state <= S_START;
        S_START: state <= S_RUN;
        S_RUN: begin
          if (cfi_fault) begin
            measure_t m;
            m = decide(sat_inc(n_cfi[sel]), CFI_TH_RELD, CFI_TH_RELC);
            n_cfi[sel]      <= sat_inc(n_cfi[sel]);
            n_meas[m]       <= sat_inc(n_meas[m]);
            last_measure    <= m;
            restore_pending <= 1'b0;
            pr_kind         <= m;
            pr_core         <= sel;
            state           <= (m == MEAS_REPEAT) ? S_RST : S_PR_WAIT;
          end else if (core_done || ccc_fault) begin
            state <= S_CHECK;
          end
        end
        S_CHECK: begin
          if (ccc_fault) begin
            measure_t m;
            m = decide(sat_inc(n_ccc[sel]), CCC_TH_RELD, CCC_TH_RELC);
            n_ccc[sel]      <= sat_inc(n_ccc[sel]);
            n_meas[m]       <= sat_inc(n_meas[m]);
            last_measure    <= m;
            restore_pending <= 1'b1;
            restore_issued  <= 1'b0;
            resume_clr      <= 1'b1;
            pr_kind         <= m;
            pr_core         <= sel;
            state           <= (m == MEAS_REPEAT) ? S_RESTORE : S_PR_WAIT;
          end else begin
            nr[sel] <= sat_inc(nr[sel]);
            state   <= S_FINISH;
          end
        end
        S_PR_WAIT: if (pr_ack) begin
          restore_issued <= 1'b0;
          state          <= restore_pending ? S_RESTORE : S_RST;
        end
        S_RESTORE: begin
          restore_issued <= 1'b1;
          if (restore_issued && !restore_busy) begin
            restore_pending <= 1'b0;
            state           <= S_RST;
          end
        end
        S_FINISH: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
