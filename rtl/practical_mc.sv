// practical_mc -- memory controller with the PRACtical extensions.
//
// Contents: the request queue and scheduler (mc_scheduler), one timing/state
// tracker per bank (mc_bank_state, each with a subarray-conflict tracker),
// and the ABO recovery sequencer (abo_recovery_fsm).
//
// Boot: after reset the controller reads the DRAM's subarray-mapping register
// with an MRR command and keeps the value (log2 rows per subarray) for its
// subarray decoders. Requests are accepted only after that (req_ready low
// before). The paper proposes exactly this register and boot-time read; the
// MRR encoding is this design's.
//
// Register-read responses (resp_valid/resp_data) belong to the boot read
// before `booted`, and to the first RFM_MASK of a recovery episode after it.
//
// Timing: one command per cycle on `cmd`; a request's RD/WR is issued no
// earlier than the cycle after it is accepted.
module practical_mc
  import prac_pkg::*;
#(
  parameter int unsigned NB      = N_BANKS,
  parameter int unsigned QD      = 32,
  parameter int unsigned CAP     = 4,
  parameter int unsigned NRFM    = N_RFM,
  parameter int unsigned TRAS    = T_RAS,
  parameter int unsigned TRCD    = T_RCD,
  parameter int unsigned TRTP    = T_RTP,
  parameter int unsigned TWR     = T_WR,
  parameter int unsigned T_LOCAL = T_RP_LOCAL,
  parameter int unsigned T_UPD   = T_CNT_UPD,
  parameter int unsigned T_PRE   = T_PRE_RECOVERY,
  parameter int unsigned T_MIT   = T_RFM
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req_valid,
  input  mem_req_t        req,
  output logic            req_ready,
  output logic            done_valid,
  output logic [ID_W-1:0] done_id,
  output logic            done_write,
  output dram_cmd_t       cmd,
  input  logic            abo,
  input  logic            resp_valid,
  input  logic [63:0]     resp_data,
  output logic            booted,
  output logic [SHIFT_W-1:0] sa_shift,
  output logic [NB-1:0]   stall_mask,
  output logic            recovering,
  output logic [31:0]     n_act,
  output logic [31:0]     n_act_overlap,
  output logic [31:0]     n_conflict_wait,
  output logic [31:0]     n_cap_pre,
  output logic [31:0]     n_cmd_in_recov,
  output logic [31:0]     n_episodes,
  output logic [31:0]     n_rfm
);

  logic [NB-1:0]             b_open, b_act_ok, b_rdwr_ok, b_pre_ok, b_upd_busy;
  logic [NB-1:0][ROW_W-1:0]  b_row;
  logic [NB-1:0][SA_W-1:0]   b_upd_sa;
  logic                      mrr_pend, mrr_sent, mrr_issued, rfm_issued;
  logic                      block_act, drain_req, rfm_req, stall_all;
  dram_cmd_t                 c;

  for (genvar b = 0; b < NB; b++) begin : g_bank
    mc_bank_state #(.TRAS(TRAS), .TRCD(TRCD), .TRTP(TRTP), .TWR(TWR),
                    .T_LOCAL(T_LOCAL), .T_UPD(T_UPD)) u_bs (
      .clk, .rst_n, .sa_shift,
      .issue_act(c.op == CMD_ACT && 32'(c.bank) == b),
      .issue_rd (c.op == CMD_RD  && 32'(c.bank) == b),
      .issue_wr (c.op == CMD_WR  && 32'(c.bank) == b),
      .issue_pre(c.op == CMD_PRE && 32'(c.bank) == b),
      .act_row(c.row),
      .is_open(b_open[b]), .open_row(b_row[b]), .act_ok(b_act_ok[b]),
      .rdwr_ok(b_rdwr_ok[b]), .pre_ok(b_pre_ok[b]),
      .upd_busy(b_upd_busy[b]), .upd_sa(b_upd_sa[b]));
  end

  abo_recovery_fsm #(.NB(NB), .NRFM(NRFM), .T_PRE(T_PRE), .T_MIT(T_MIT)) u_rec (
    .clk, .rst_n, .abo(abo && booted), .all_closed(b_open == '0),
    .rfm_issued, .resp_valid(resp_valid && booted), .resp_mask(resp_data[NB-1:0]),
    .block_act, .drain_req, .rfm_req, .stall_all, .stall_mask, .recovering,
    .episodes(n_episodes), .rfm_cmds(n_rfm));

  mc_scheduler #(.NB(NB), .QD(QD), .CAP(CAP)) u_sched (
    .clk, .rst_n, .req_valid, .req, .req_ready, .sa_shift,
    .b_open, .b_row, .b_act_ok, .b_rdwr_ok, .b_pre_ok, .b_upd_busy, .b_upd_sa,
    .accept(booted), .mrr_req(mrr_pend && !mrr_sent), .rfm_req, .drain_req, .block_act,
    .stall_all, .stall_mask, .cmd(c), .rfm_issued, .mrr_issued,
    .done_valid, .done_id, .done_write,
    .n_act, .n_act_overlap, .n_conflict_wait, .n_cap_pre, .n_cmd_in_recov);

  assign cmd = c;

  // boot-time read of the subarray-mapping register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mrr_pend <= 1'b1;
      mrr_sent <= 1'b0;
      booted   <= 1'b0;
      sa_shift <= '0;
    end else if (!booted) begin
      if (mrr_issued) mrr_sent <= 1'b1;
      if (mrr_sent && resp_valid) begin
        sa_shift <= SHIFT_W'(resp_data);
        booted   <= 1'b1;
        mrr_pend <= 1'b0;
      end
    end
  end

endmodule
