// tb_practical_top -- end-to-end run of the whole channel, scaled down so it
// finishes quickly: 4 banks of 256 rows in 16 subarrays, alert threshold 16
// (lowered by 5 to 11), PRAC-2, 16-entry queue, pre-recovery 40 and RFM 60
// cycles. DRAM timings (tRAS, 15 ns local precharge, 21 ns counter update,
// 10 ns register read) are the defaults.
//
// Traffic is random reads and writes over a few rows of every bank, mixed
// with two hammering streams, at most four of their requests in flight so
// they cannot fill the queue, (bank 2 rows 40/75, bank 1 rows 100/115, neighbouring
// subarrays) that
// drive their rows' counters to the alert threshold again and again. The bench
// checks that every request completes exactly once and counts each mechanism
// of the design; the run fails if any of them never happened:
//   - ACT overlapped with another subarray's counter update,
//   - ACT held back by a subarray conflict,
//   - PRE forced by the FR-FCFS cap,
//   - ABO raised by the DRAM, recovery episodes with two RFM_MASKs each,
//   - a BA mask naming only some of the banks,
//   - commands to unmasked banks while masked banks are mitigated,
//   - mitigations resetting aggressor counters and refreshing victims,
//   - a full request queue.
// It also checks that alerts start at the lowered threshold (11) and that no
// written-back counter goes past 2x the threshold,
// i.e. that mitigation keeps up with the hammering.
module tb_practical_top;
  import prac_pkg::*;
  localparam int NB = 4, TH = 16, NREQ = 4000;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0;
  mem_req_t req = '0;
  logic req_ready, done_valid, done_write;
  logic [ID_W-1:0] done_id;
  dram_cmd_t cmd;
  logic abo, recovering;
  logic [NB-1:0] ba_q, stall_mask, bank_rfm_busy;
  logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov, n_episodes,
               n_rfm, n_mitigations, n_victim_refreshes, n_alerts;
  logic [BANK_W-1:0] dbg_bank = '0;
  logic [ROW_W-1:0] dbg_row = '0;
  logic [CNT_W-1:0] dbg_cnt;
  int checks = 0, failures = 0;

  practical_top #(.NB(NB), .ROWS(256), .NSA(16), .QD(16), .CAP(4), .NRFM(2), .TH(TH),
                  .T_PRE(40), .T_MIT(60)) dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // largest counter value written back by any bank, smallest one that alerted
  int max_wb = 0, min_alert = 1000;
  for (genvar b = 0; b < NB; b++) begin : g_mon
    always @(negedge clk) begin
      if (dut.u_dram.g_bank[b].u_bank.wb_valid && int'(dut.u_dram.g_bank[b].u_bank.wb_cnt) > max_wb)
        max_wb = int'(dut.u_dram.g_bank[b].u_bank.wb_cnt);
      if (dut.u_dram.g_bank[b].u_bank.alert_set && int'(dut.u_dram.g_bank[b].u_bank.wb_cnt) < min_alert)
        min_alert = int'(dut.u_dram.g_bank[b].u_bank.wb_cnt);
    end
  end

  int done_cnt[256];
  bit is_h[256];
  int hout = 0;             // hammer requests in flight
  int completed = 0, pushed = 0, full_cycles = 0, partial_masks = 0;
  logic ready_seen = 0;
  always @(negedge clk) begin
    #2;
    if (rst_n && done_valid) begin
      done_cnt[int'(done_id)]++; completed++;
      if (is_h[int'(done_id)]) begin is_h[int'(done_id)] = 0; hout--; end
    end
    if (req_ready) ready_seen = 1;
    else if (ready_seen) full_cycles++;
    if (stall_mask != 0 && stall_mask != '1 && cmd.op == CMD_RFM_MASK) partial_masks++;
  end

  int hammer_phase = 0;
  initial begin
    foreach (done_cnt[i]) begin done_cnt[i] = 0; is_h[i] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (pushed < NREQ) begin
      @(negedge clk);
      #1;
      req_valid = 0;
      if (($urandom % 2) == 0) begin
        int r = int'($urandom % 8);  // 3 in 8 hammer
        req = '0;
        req.id = ID_W'(pushed);
        req.write = 1'($urandom % 4 == 0);
        is_h[pushed % 256] = 0;
        if (r < 3 && hout >= 4) r = 3;
        if (r < 2) begin                       // hammer bank 2: rows 40, 75
          req.bank = 2; req.row = (hammer_phase % 2 == 0) ? 16'd40 : 16'd75;
          hammer_phase++;
        end else if (r < 3) begin              // hammer bank 1: rows 100, 115
          req.bank = 1; req.row = (hammer_phase % 2 == 0) ? 16'd100 : 16'd115;
          hammer_phase++;
        end else begin                         // background: a few rows per bank
          req.bank = BANK_W'($urandom % NB);
          req.row = ROW_W'((($urandom % 3) * 21 + ($urandom % 2) * 150) % 256);
        end
        req_valid = 1;
        #1;
        if (req_ready) begin
          if (r < 3) begin is_h[pushed % 256] = 1; hout++; end
          pushed++;
        end else req_valid = 0;
      end
    end
    @(negedge clk) req_valid = 0;
    repeat (3000) @(negedge clk);
    ck(completed == NREQ, $sformatf("all %0d requests completed (%0d)", NREQ, completed));
    for (int i = 0; i < 256; i++)
      ck(done_cnt[i] == NREQ / 256 + ((i < NREQ % 256) ? 1 : 0), $sformatf("id %0d completions", i));
    $display("ACT %0d | overlapped %0d | conflict-wait cycles %0d | cap PRE %0d | queue-full cycles %0d",
             n_act, n_act_overlap, n_conflict_wait, n_cap_pre, full_cycles);
    $display("alerts %0d | episodes %0d | RFM_MASK %0d | partial masks %0d | cmds during stall %0d",
             n_alerts, n_episodes, n_rfm, partial_masks, n_cmd_in_recov);
    $display("mitigations %0d | victim refreshes %0d | max counter written back %0d",
             n_mitigations, n_victim_refreshes, max_wb);
    ck(n_act_overlap > 0, "overlapped ACT");
    ck(n_conflict_wait > 0, "subarray-conflict wait");
    ck(n_cap_pre > 0, "cap PRE");
    ck(full_cycles > 0, "queue full");
    ck(n_alerts > 0 && n_episodes > 1, "ABO episodes");
    ck(n_rfm == 2 * n_episodes && !recovering, "two RFM_MASKs per episode");
    ck(partial_masks > 0, "BA mask naming some banks only");
    ck(n_cmd_in_recov > 0, "commands to unmasked banks during recovery");
    // rows 0 and 255 have one neighbour only
    ck(n_mitigations > 0 && n_victim_refreshes <= 2 * n_mitigations &&
       n_victim_refreshes >= n_mitigations, "mitigations refresh their victims");
    ck(min_alert == TH - 5, $sformatf("alerts start at threshold - 5 (%0d)", min_alert));
    ck(max_wb <= 2 * TH, $sformatf("counters stay below 2x threshold (%0d)", max_wb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
