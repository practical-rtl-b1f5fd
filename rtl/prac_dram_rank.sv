// prac_dram_rank -- the DRAM side of one PRACtical channel: NB banks with
// per-row activation counters, the Bank Alert register, the ABO logic and the
// subarray-mapping register, behind one command bus.
//
// Commands (one per cycle, prac_pkg::dram_cmd_t):
//   ACT bank,row   opens the row; its counter goes to the row buffer
//   PRE bank       closes the row; the bank's increment unit updates the
//                  counter in the background (see prac_bank)
//   RD / WR        accepted for an open row; no data is modelled
//   RFM_MASK       recovery + register read: the banks of the BA mask start a
//                  mitigation and the BA contents come back on resp_data
//                  T_READ cycles later (10 ns)
//   MRR            returns the subarray-mapping register, log2(rows per
//                  subarray), on resp_data T_READ cycles later, but not before
//                  the counters have been initialised after reset
//
// A bank sets its BA bit when a row's count reaches the lowered threshold
// ALERT_TH - MARGIN. The paper lowers the alert threshold by the largest
// number of ACTs one bank can receive while another is being mitigated
// (350 ns / 52 ns -> 5) so that bank-level stalling keeps the security of
// channel-wide RFM; it also mentions, as an alternative it does not use, a
// second threshold for the BA bit.
//
// resp_data is 64 bits wide (the BA register of a 64-bank channel); with fewer
// banks the upper bits are zero. One register read may be outstanding.
module prac_dram_rank
  import prac_pkg::*;
#(
  parameter int unsigned NB       = N_BANKS,
  parameter int unsigned ROWS     = ROWS_PER_BANK,
  parameter int unsigned NSA      = N_SUBARRAYS,
  parameter int unsigned NRFM     = N_RFM,
  parameter int unsigned TH       = ALERT_TH,
  parameter int unsigned MARGIN   = SAFETY_MARGIN,
  parameter int unsigned T_LOCAL  = T_RP_LOCAL,
  parameter int unsigned T_UPD    = T_CNT_UPD,
  parameter int unsigned T_MIT    = T_RFM,
  parameter int unsigned T_READ   = T_BA_READ
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dram_cmd_t         cmd,
  output logic              abo,
  output logic              resp_valid,
  output logic [63:0]       resp_data,
  output logic              init_done,
  output logic [NB-1:0]     ba_q,          // BA register (observation)
  output logic [NB-1:0]     bank_open,
  output logic [NB-1:0]     bank_rfm_busy,
  output logic [31:0]       mitigations,   // RFMs that mitigated a row
  output logic [31:0]       victim_refreshes,
  output logic [31:0]       alerts,        // rising edges of abo
  input  logic [BANK_W-1:0] dbg_bank,
  input  logic [ROW_W-1:0]  dbg_row,
  output logic [CNT_W-1:0]  dbg_cnt
);

  localparam int unsigned SA_SHIFT = $clog2((ROWS / NSA) > 0 ? (ROWS / NSA) : 1);
  localparam int unsigned TH_EFF   = (TH > MARGIN) ? (TH - MARGIN) : 1;
  localparam logic [SHIFT_W-1:0] SHIFT_VAL = SHIFT_W'(SA_SHIFT);

  logic [NB-1:0] act_v, pre_v, rfm_v, alert_v, init_v, mitrow_v;
  logic [NB-1:0][ROW_W-1:0] mitrow;
  logic [NB-1:0][CNT_W-1:0] dbg_v;
  logic [NB-1:0] ba_rd_data, rfm_go, resp_mask;
  logic          ba_rd, ba_any, abo_q;
  logic          is_act, is_rfm, is_mrr;
  logic          rsp_pend, rsp_is_mrr;
  logic [15:0]   rsp_timer;
  logic [63:0]   rsp_buf;

  function automatic logic [NB-1:0] act_mask(input logic [BANK_W-1:0] b);
    act_mask = '0;
    for (int i = 0; i < NB; i++) act_mask[i] = (32'(b) == i);
  endfunction

  assign is_act = (cmd.op == CMD_ACT);
  assign is_rfm = (cmd.op == CMD_RFM_MASK);
  assign is_mrr = (cmd.op == CMD_MRR);

  // command decode to the banks
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      act_v[b] = is_act              && (32'(cmd.bank) == b);
      pre_v[b] = (cmd.op == CMD_PRE) && (32'(cmd.bank) == b);
    end
    rfm_v = rfm_go;
  end

  for (genvar b = 0; b < NB; b++) begin : g_bank
    prac_bank #(.ROWS(ROWS), .RW(ROW_W), .SW(SA_W), .CW(CNT_W),
                .T_LOCAL(T_LOCAL), .T_UPD(T_UPD), .T_MIT(T_MIT)) u_bank (
      .clk, .rst_n,
      .sa_shift(SHIFT_VAL), .alert_th(CNT_W'(TH_EFF)),
      .act(act_v[b]), .act_row(cmd.row), .pre(pre_v[b]), .rfm(rfm_v[b]),
      .init_done(init_v[b]), .is_open(bank_open[b]), .open_row(),
      .upd_busy(), .upd_sa(), .rfm_busy(bank_rfm_busy[b]),
      .alert_set(alert_v[b]), .mit_done(), .mit_row_valid(mitrow_v[b]),
      .mit_row(mitrow[b]), .hot_valid(), .hot_row(), .hot_cnt(),
      .dbg_row(dbg_row), .dbg_cnt(dbg_v[b]));
  end

  ba_register #(.NB(NB)) u_ba (
    .clk, .rst_n, .set(alert_v), .rd(ba_rd), .rd_data(ba_rd_data), .q(ba_q), .any(ba_any));

  abo_alert_ctrl #(.NB(NB), .NRFM(NRFM)) u_abo (
    .clk, .rst_n, .ba_value(ba_rd_data), .ba_any,
    .rfm_mask_cmd(is_rfm), .act_cmd(is_act),
    .abo, .ba_rd, .rfm_go, .resp_mask, .in_episode(), .armed());

  assign init_done = &init_v;
  assign dbg_cnt   = dbg_v[dbg_bank];

  // register-read response path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_pend   <= 1'b0;
      rsp_is_mrr <= 1'b0;
      rsp_timer  <= '0;
      rsp_buf    <= '0;
    end else begin
      if (is_rfm || is_mrr) begin
        rsp_pend   <= 1'b1;
        rsp_is_mrr <= is_mrr;
        rsp_timer  <= 16'(T_READ);
        rsp_buf    <= is_mrr ? 64'(SHIFT_VAL) : 64'(resp_mask);
      end else if (rsp_pend) begin
        if (rsp_timer > 16'd1) rsp_timer <= rsp_timer - 16'd1;
        else if (!rsp_is_mrr || init_done) rsp_pend <= 1'b0;
      end
    end
  end

  assign resp_valid = rsp_pend && (rsp_timer == 16'd1) && (!rsp_is_mrr || init_done);
  assign resp_data  = rsp_buf;

  // statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mitigations      <= '0;
      victim_refreshes <= '0;
      alerts           <= '0;
      abo_q            <= 1'b0;
    end else begin
      automatic logic [31:0] m = '0;
      automatic logic [31:0] v = '0;
      for (int b = 0; b < NB; b++) begin
        if (mitrow_v[b]) begin
          m = m + 1;
          v = v + ((mitrow[b] != '0) ? 32'd1 : 32'd0)
                + ((32'(mitrow[b]) != ROWS - 1) ? 32'd1 : 32'd0);
        end
      end
      mitigations      <= mitigations + m;
      victim_refreshes <= victim_refreshes + v;
      abo_q            <= abo;
      if (abo && !abo_q) alerts <= alerts + 32'd1;
    end
  end

  // one register read at a time; no RD/WR to a closed bank
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n)
                               (is_rfm || is_mrr) |-> !rsp_pend);
  a_rdwr_open: assert property (@(posedge clk) disable iff (!rst_n)
                                (cmd.op == CMD_RD || cmd.op == CMD_WR) |-> |(bank_open & act_mask(cmd.bank)));

endmodule
