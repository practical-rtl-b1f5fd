// tb_workload_attack -- the performance attack: an attacker alternates two
// rows of one bank (every access is a new ACT, as under a closed-row policy)
// to raise ABO over and over, while benign traffic uses the other banks.
// The attack is set to one, two and three alerts per refresh interval by the
// alert threshold, as the evaluation does: thresholds 64, 32 and 16, three
// channels side by side. Each channel has 8 banks of 4096 rows in 256
// subarrays and the default PRAC-2 with 180 ns pre-recovery and 350 ns RFMs.
//
// Each channel runs 40000 cycles (about ten 3900 ns refresh intervals) of
// traffic, then drains. The bench checks per channel that
//   - the BA mask of every episode names the attacked bank only,
//   - benign banks keep getting commands while the attacked bank recovers,
//   - benign requests complete during recovery episodes,
//   - every request completes,
// and that the attack reaches its one, two or three alerts per interval and
// leaves the benign completion rate during recovery at 80% or more of the
// rate outside it (the paper reports under 6% benign slowdown);
// across channels, a lower threshold gives more alerts. It prints
// alerts per refresh interval, the benign completion rate inside and outside
// recovery episodes and the share of time spent in recovery.
module tb_workload_attack;
  import prac_pkg::*;
  localparam int NB = 8, RUN = 40000, TREFI = 3900;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int finished = 0;
  int alerts_of[3];
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  for (genvar ai = 0; ai < 3; ai++) begin : g_att
    localparam int TH = 64 >> ai;
    logic req_valid = 0, req_ready, done_valid, done_write, abo, recovering;
    mem_req_t req = '0;
    logic [ID_W-1:0] done_id;
    dram_cmd_t cmd;
    logic [NB-1:0] ba_q, stall_mask, bank_rfm_busy;
    logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov, n_episodes,
                 n_rfm, n_mitigations, n_victim_refreshes, n_alerts;
    logic [CNT_W-1:0] dbg_cnt;

    practical_top #(.NB(NB), .ROWS(4096), .NSA(256), .TH(TH)) dut (
      .clk, .rst_n, .req_valid, .req, .req_ready, .done_valid, .done_id, .done_write, .cmd,
      .abo, .ba_q, .stall_mask, .recovering, .bank_rfm_busy, .n_act, .n_act_overlap,
      .n_conflict_wait, .n_cap_pre, .n_cmd_in_recov, .n_episodes, .n_rfm, .n_mitigations,
      .n_victim_refreshes, .n_alerts, .dbg_bank(6'd1), .dbg_row(16'd100), .dbg_cnt);

    int pushed = 0, completed = 0, hout = 0, in_flight = 0;
    int ben_in = 0, ben_out = 0, cyc_in = 0, cyc_out = 0;
    logic [NB-1:0] masks_seen = '0;
    bit is_h[256];
    always @(negedge clk) begin
      #2;
      if (rst_n && dut.u_mc.booted) begin
        masks_seen |= stall_mask;
        if (recovering) cyc_in++; else cyc_out++;
        if (done_valid) begin
          completed++;
          if (is_h[int'(done_id)]) begin is_h[int'(done_id)] = 0; hout--; end
          else if (recovering) ben_in++;
          else ben_out++;
        end
      end
    end

    initial begin
      int hp = 0, t0;
      foreach (is_h[i]) is_h[i] = 0;
      @(posedge rst_n);
      while (!req_ready) @(negedge clk);
      t0 = int'($time / 10);
      while (int'($time / 10) - t0 < RUN) begin
        @(negedge clk);
        #1;
        req_valid = 0;
        if (hout < 2 || $urandom % 2 == 0) begin
          logic h;
          h = hout < 2;
          req = '0;
          req.id = ID_W'(pushed);
          if (h) begin
            req.bank = 6'd1; req.row = (hp % 2 == 0) ? 16'd100 : 16'd3000;
          end else begin
            req.bank = BANK_W'(2 + $urandom % (NB - 2));
            req.row = ROW_W'($urandom % 4096);
            req.write = 1'($urandom);
          end
          req_valid = 1;
          #1;
          if (req_ready) begin
            if (h) begin is_h[pushed % 256] = 1; hout++; hp++; end
            pushed++;
          end else req_valid = 0;
        end
      end
      @(negedge clk) req_valid = 0;
      while (completed < pushed || recovering) @(negedge clk);
      alerts_of[ai] = int'(n_alerts);
      $display("TH=%0d: alerts %0d (%0d.%02d per tREFI), episodes %0d, time in recovery %0d%%, benign done per 1000 cycles: %0d in recovery, %0d outside, cmds during stalls %0d",
               TH, n_alerts, int'(n_alerts) * TREFI / RUN, (int'(n_alerts) * TREFI * 100 / RUN) % 100,
               n_episodes, cyc_in * 100 / (cyc_in + cyc_out), ben_in * 1000 / (cyc_in > 0 ? cyc_in : 1),
               ben_out * 1000 / (cyc_out > 0 ? cyc_out : 1), n_cmd_in_recov);
      ck(n_episodes > 0 && masks_seen == NB'(2), $sformatf("TH=%0d: BA masks name bank 1 only (%b)", TH, masks_seen));
      ck(n_cmd_in_recov > 0, $sformatf("TH=%0d: benign banks served while bank 1 recovers", TH));
      ck(ben_in > 0, $sformatf("TH=%0d: benign requests complete during recovery", TH));
      ck(int'(n_alerts) * TREFI >= (ai + 1) * RUN, $sformatf("TH=%0d: at least %0d alerts per tREFI", TH, ai + 1));
      ck(ben_in * cyc_out * 10 >= ben_out * cyc_in * 8,
         $sformatf("TH=%0d: benign rate in recovery at least 80%% of the rate outside", TH));
      ck(completed == pushed, $sformatf("TH=%0d: all %0d requests completed (%0d)", TH, pushed, completed));
      finished++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (finished == 3);
    ck(alerts_of[2] > alerts_of[1] && alerts_of[1] > alerts_of[0], "lower threshold, more alerts");
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
