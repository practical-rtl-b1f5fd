// tb_practical_top_full -- the channel at its full design point, no
// parameter overrides: 64 banks, 64K rows per bank in 256 subarrays, alert
// threshold 128 (lowered by 5), PRAC-2, 32-entry queue, 180 ns pre-recovery,
// 350 ns RFM.
//
// After the counters are cleared (64K cycles) and the mapping register is
// read, random background reads and writes go to all banks while one stream
// hammers bank 5, alternating rows 1000 and 3000 (different subarrays, so the
// next ACT overlaps the previous row's counter update). The bench checks that
// ABO is raised once a row reaches 123 activations, that the recovery's BA
// mask names bank 5 only, that other banks keep getting commands while bank 5
// is mitigated, that the hottest row's counter is reset, that every request
// completes exactly once and that ACTs did overlap counter updates.
module tb_practical_top_full;
  import prac_pkg::*;
  localparam int NREQ = 3000;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0;
  mem_req_t req = '0;
  logic req_ready, done_valid, done_write;
  logic [ID_W-1:0] done_id;
  dram_cmd_t cmd;
  logic abo, recovering;
  logic [N_BANKS-1:0] ba_q, stall_mask, bank_rfm_busy;
  logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov, n_episodes,
               n_rfm, n_mitigations, n_victim_refreshes, n_alerts;
  logic [BANK_W-1:0] dbg_bank = 6'd5;
  logic [ROW_W-1:0] dbg_row = 16'd1000;
  logic [CNT_W-1:0] dbg_cnt;
  int checks = 0, failures = 0;

  practical_top dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int done_cnt[256];
  int completed = 0, pushed = 0, hammer = 0, cnt_at_abo = -1;
  logic [N_BANKS-1:0] masks_seen = '0;
  always @(negedge clk) begin
    #2;
    if (rst_n && done_valid) begin done_cnt[int'(done_id)]++; completed++; end
    masks_seen |= stall_mask;
    if (abo && cnt_at_abo < 0) cnt_at_abo = int'(dbg_cnt);
  end

  initial begin
    foreach (done_cnt[i]) done_cnt[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!req_ready) @(negedge clk);
    while (pushed < NREQ) begin
      @(negedge clk);
      #1;
      req_valid = 0;
      req = '0;
      req.id = ID_W'(pushed);
      if (($urandom % 4) != 0) begin                 // hammer bank 5
        req.bank = 6'd5;
        req.row = (hammer % 2 == 0) ? 16'd1000 : 16'd3000;
      end else begin
        req.bank = BANK_W'($urandom % N_BANKS);
        if (req.bank == 6'd5) req.bank = 6'd6;
        req.row = ROW_W'($urandom);
        req.write = 1'($urandom % 2);
      end
      req_valid = 1;
      #1;
      if (req_ready) begin
        if (req.bank == 6'd5) hammer++;
        pushed++;
      end else req_valid = 0;
    end
    @(negedge clk) req_valid = 0;
    repeat (3000) @(negedge clk);
    $display("ACT %0d overlapped %0d | alerts %0d episodes %0d RFM_MASK %0d | mitigations %0d | cmds during stall %0d | row 1000 count at ABO %0d, now %0d",
             n_act, n_act_overlap, n_alerts, n_episodes, n_rfm, n_mitigations, n_cmd_in_recov, cnt_at_abo, dbg_cnt);
    ck(completed == NREQ, $sformatf("all requests completed (%0d)", completed));
    for (int i = 0; i < 256; i++)
      ck(done_cnt[i] == NREQ / 256 + ((i < NREQ % 256) ? 1 : 0), $sformatf("id %0d completions", i));
    ck(n_alerts > 0 && n_episodes > 0 && n_rfm == 2 * n_episodes, "ABO episode with two RFM_MASKs");
    ck(cnt_at_abo == ALERT_TH - SAFETY_MARGIN, $sformatf("ABO at %0d activations", cnt_at_abo));
    ck(masks_seen == 64'(1) << 5, $sformatf("BA mask names bank 5 only (%h)", masks_seen));
    ck(n_mitigations > 0 && n_cmd_in_recov > 0, "bank 5 mitigated while others were served");
    ck(int'(dbg_cnt) < ALERT_TH - SAFETY_MARGIN, "aggressor counter reset by the mitigation");
    ck(n_act_overlap > 0, "ACTs overlapped with counter updates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
