// mc_bank_state -- the memory controller's timing state for one bank.
//
// Tracks whether a row is open and which, and three "earliest" conditions as
// down-counters loaded by the commands the controller issues to this bank:
//   act_ok   : bank closed and T_LOCAL (15 ns) since its PRE. Whether the ACT
//              may really go also depends on the subarray of the new row:
//              upd_busy/upd_sa (from the embedded sa_conflict_tracker) tell
//              which subarray still has a counter update in flight, until
//              36 ns after PRE; an ACT to it or a neighbour must wait.
//   rdwr_ok  : row open and tRCD since ACT.
//   pre_ok   : row open, tRAS since ACT, tRTP since the last RD and tWR since
//              the last WR.
// The split of the old 36 ns tRP into "15 ns, or 36 ns on a subarray
// conflict" is the PRACtical rule; tRAS, tRTP, tWR follow the PRAC column of
// the DDR5 timing table. tRCD is this design's choice. Other DDR5 timings
// (tCCD, tFAW, tRRD, refresh) are not modelled.
//
// Timing: a command issued in cycle t (issue_* high) loads its counter at the
// edge ending t; a constraint of T cycles is met from cycle t+T on.
module mc_bank_state
  import prac_pkg::*;
#(
  parameter int unsigned TRAS    = T_RAS,
  parameter int unsigned TRCD    = T_RCD,
  parameter int unsigned TRTP    = T_RTP,
  parameter int unsigned TWR     = T_WR,
  parameter int unsigned T_LOCAL = T_RP_LOCAL,
  parameter int unsigned T_UPD   = T_CNT_UPD
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] sa_shift,
  input  logic               issue_act,
  input  logic               issue_rd,
  input  logic               issue_wr,
  input  logic               issue_pre,
  input  logic [ROW_W-1:0]   act_row,
  output logic               is_open,
  output logic [ROW_W-1:0]   open_row,
  output logic               act_ok,
  output logic               rdwr_ok,
  output logic               pre_ok,
  output logic               upd_busy,
  output logic [SA_W-1:0]    upd_sa
);

  logic [15:0]   act_wait, rdwr_wait, pre_wait;
  logic [SA_W-1:0] open_sa;

  subarray_decoder u_dec_open (.row(open_row), .sa_shift, .sa_id(open_sa), .local_row());

  sa_conflict_tracker #(.SW(SA_W), .T_LOCAL(T_LOCAL), .T_UPD(T_UPD)) u_trk (
    .clk, .rst_n, .pre(issue_pre && is_open), .pre_sa(open_sa), .q_sa(open_sa),
    .busy(upd_busy), .busy_sa(upd_sa), .conflict());

  function automatic logic [15:0] max16(input logic [15:0] a, input logic [15:0] b);
    return (a > b) ? a : b;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open   <= 1'b0;
      open_row  <= '0;
      act_wait  <= '0;
      rdwr_wait <= '0;
      pre_wait  <= '0;
    end else begin
      act_wait  <= (act_wait  != 0) ? act_wait  - 16'd1 : 16'd0;
      rdwr_wait <= (rdwr_wait != 0) ? rdwr_wait - 16'd1 : 16'd0;
      pre_wait  <= (pre_wait  != 0) ? pre_wait  - 16'd1 : 16'd0;
      if (issue_act) begin
        is_open   <= 1'b1;
        open_row  <= act_row;
        rdwr_wait <= 16'(TRCD - 1);
        pre_wait  <= 16'(TRAS - 1);
      end else if (issue_pre) begin
        is_open   <= 1'b0;
        act_wait  <= 16'(T_LOCAL - 1);
      end else if (issue_rd) begin
        pre_wait  <= max16(pre_wait - ((pre_wait != 0) ? 16'd1 : 16'd0), 16'(TRTP - 1));
      end else if (issue_wr) begin
        pre_wait  <= max16(pre_wait - ((pre_wait != 0) ? 16'd1 : 16'd0), 16'(TWR - 1));
      end
    end
  end

  always_comb begin
    act_ok  = !is_open && (act_wait == 0);
    rdwr_ok =  is_open && (rdwr_wait == 0);
    pre_ok  =  is_open && (pre_wait == 0);
  end

endmodule
