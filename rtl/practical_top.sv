// practical_top -- a complete PRACtical memory channel: the memory controller
// (practical_mc) driving the DRAM side (prac_dram_rank) over one command bus,
// with the ABO pin and the register-read response path going back.
//
// Requests enter at req_valid/req/req_ready and complete at done_valid/done_id
// when their RD or WR is issued. After reset the DRAM clears its counters
// (ROWS cycles) and the controller reads the subarray mapping; req_ready rises
// once both are done. The remaining outputs expose the command bus, the alert
// state and event counters for observation; dbg_* reads one row's activation
// counter.
//
// All parameters default to the design point: 64 banks, 64K rows per bank,
// 256 subarrays, 8-bit counters, alert threshold 128 lowered by 5, PRAC-2
// (two RFM_MASKs per alert), DDR5 PRAC timings at 1 ns per cycle.
module practical_top
  import prac_pkg::*;
#(
  parameter int unsigned NB      = N_BANKS,
  parameter int unsigned ROWS    = ROWS_PER_BANK,
  parameter int unsigned NSA     = N_SUBARRAYS,
  parameter int unsigned QD      = 32,
  parameter int unsigned CAP     = 4,
  parameter int unsigned NRFM    = N_RFM,
  parameter int unsigned TH      = ALERT_TH,
  parameter int unsigned MARGIN  = SAFETY_MARGIN,
  parameter int unsigned T_PRE   = T_PRE_RECOVERY,
  parameter int unsigned T_MIT   = T_RFM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  mem_req_t          req,
  output logic              req_ready,
  output logic              done_valid,
  output logic [ID_W-1:0]   done_id,
  output logic              done_write,
  output dram_cmd_t         cmd,
  output logic              abo,
  output logic [NB-1:0]     ba_q,
  output logic [NB-1:0]     stall_mask,
  output logic              recovering,
  output logic [NB-1:0]     bank_rfm_busy,
  output logic [31:0]       n_act,
  output logic [31:0]       n_act_overlap,
  output logic [31:0]       n_conflict_wait,
  output logic [31:0]       n_cap_pre,
  output logic [31:0]       n_cmd_in_recov,
  output logic [31:0]       n_episodes,
  output logic [31:0]       n_rfm,
  output logic [31:0]       n_mitigations,
  output logic [31:0]       n_victim_refreshes,
  output logic [31:0]       n_alerts,
  input  logic [BANK_W-1:0] dbg_bank,
  input  logic [ROW_W-1:0]  dbg_row,
  output logic [CNT_W-1:0]  dbg_cnt
);

  logic        resp_valid;
  logic [63:0] resp_data;

  practical_mc #(.NB(NB), .QD(QD), .CAP(CAP), .NRFM(NRFM), .T_PRE(T_PRE), .T_MIT(T_MIT)) u_mc (
    .clk, .rst_n, .req_valid, .req, .req_ready, .done_valid, .done_id, .done_write,
    .cmd, .abo, .resp_valid, .resp_data, .booted(), .sa_shift(),
    .stall_mask, .recovering, .n_act, .n_act_overlap, .n_conflict_wait, .n_cap_pre,
    .n_cmd_in_recov, .n_episodes, .n_rfm);

  prac_dram_rank #(.NB(NB), .ROWS(ROWS), .NSA(NSA), .NRFM(NRFM), .TH(TH), .MARGIN(MARGIN),
                   .T_MIT(T_MIT)) u_dram (
    .clk, .rst_n, .cmd, .abo, .resp_valid, .resp_data, .init_done(),
    .ba_q, .bank_open(), .bank_rfm_busy,
    .mitigations(n_mitigations), .victim_refreshes(n_victim_refreshes), .alerts(n_alerts),
    .dbg_bank, .dbg_row, .dbg_cnt);

endmodule
