// abo_recovery_fsm -- the memory controller's reaction to an Alert Back-Off,
// with bank-level stalling through RFM_MASK.
//
// Sequence (states):
//   IDLE      normal operation; an ABO starts the pre-recovery window.
//   PRE_REC   T_PRE cycles (180 ns) of normal operation, as ABO allows.
//   DRAIN     no new ACT; open rows are closed (drain_req). The controller
//             cannot know the BA mask before reading it, and a bank must be
//             closed to be mitigated, so every open row is closed first (this
//             design's choice; plain RFMab has the same precondition).
//   ISSUE     asks the scheduler for an RFM_MASK slot (rfm_req). Before the
//             first RFM_MASK of an episode nothing may be issued (stall_all).
//   WAIT_BA   the first RFM_MASK returns the BA register after the register
//             read (10 ns); all banks stay stalled until it arrives.
//   RECOVER   only the banks of the BA mask are stalled (stall_mask); the
//             others are served normally. After T_MIT cycles (350 ns, counted
//             from the RFM_MASK) either the next of the n RFM_MASKs is issued
//             (PRAC-n) or the episode ends and the mask is cleared.
// A plain PRAC+ABO controller would stall every bank for the whole recovery;
// here only the masked banks are.
//
// The FSM sees the ABO as a level; the DRAM holds it until the RFM_MASK.
// Timing: ABO first seen in cycle t -> draining starts in cycle t+T_PRE; an
// RFM_MASK in cycle t -> the next RFM_MASK, or the end of the episode, in
// cycle t+T_MIT. T_PRE and T_MIT must be at least 2.
module abo_recovery_fsm
  import prac_pkg::*;
#(
  parameter int unsigned NB    = N_BANKS,
  parameter int unsigned NRFM  = N_RFM,
  parameter int unsigned T_PRE = T_PRE_RECOVERY,
  parameter int unsigned T_MIT = T_RFM
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          abo,
  input  logic          all_closed,     // no bank has an open row
  input  logic          rfm_issued,     // scheduler put RFM_MASK on the bus
  input  logic          resp_valid,     // BA register contents arrive
  input  logic [NB-1:0] resp_mask,
  output logic          block_act,
  output logic          drain_req,
  output logic          rfm_req,
  output logic          stall_all,
  output logic [NB-1:0] stall_mask,
  output logic          recovering,     // an episode is in progress
  output logic [31:0]   episodes,
  output logic [31:0]   rfm_cmds
);

  typedef enum logic [2:0] {S_IDLE, S_PRE_REC, S_DRAIN, S_ISSUE, S_WAIT_BA, S_RECOVER} state_e;

  state_e        st;
  logic [15:0]   timer;        // pre-recovery, then RFM duration
  logic [7:0]    k;            // RFM_MASKs issued in this episode
  logic [NB-1:0] mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      timer    <= '0;
      k        <= '0;
      mask_q   <= '0;
      episodes <= '0;
      rfm_cmds <= '0;
    end else begin
      if (timer != 0) timer <= timer - 16'd1;
      unique case (st)
        S_IDLE: if (abo) begin
          st       <= S_PRE_REC;
          timer    <= 16'(T_PRE - 2);
          episodes <= episodes + 32'd1;
        end
        S_PRE_REC: if (timer == 0) st <= S_DRAIN;
        S_DRAIN:   if (all_closed) st <= S_ISSUE;
        S_ISSUE: if (rfm_issued) begin
          rfm_cmds <= rfm_cmds + 32'd1;
          timer    <= 16'(T_MIT - 2);
          k        <= k + 8'd1;
          st       <= (k == 0) ? S_WAIT_BA : S_RECOVER;
        end
        S_WAIT_BA: if (resp_valid) begin
          mask_q <= resp_mask;
          st     <= S_RECOVER;
        end
        S_RECOVER: if (timer == 0) begin
          if (32'(k) >= NRFM) begin
            st     <= S_IDLE;
            k      <= '0;
            mask_q <= '0;
          end else begin
            st <= S_ISSUE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    block_act  = (st == S_DRAIN) || (st == S_ISSUE && k == 0) || (st == S_WAIT_BA);
    drain_req  = (st == S_DRAIN);
    rfm_req    = (st == S_ISSUE);
    stall_all  = (st == S_ISSUE && k == 0) || (st == S_WAIT_BA);
    stall_mask = mask_q;
    recovering = (st != S_IDLE);
  end

  a_rfm_when_asked: assert property (@(posedge clk) disable iff (!rst_n) rfm_issued |-> rfm_req);

endmodule
