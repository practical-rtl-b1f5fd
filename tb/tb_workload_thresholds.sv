// tb_workload_thresholds -- the evaluated threshold / PRAC-n grid: alert
// thresholds 64, 128 and 256, each with 1, 2 and 4 RFMs per alert (PRAC-1/2/4),
// nine channels side by side. Each channel keeps the default timings
// (180 ns pre-recovery, 350 ns RFM, 15/36 ns precharge) and 256 subarrays,
// but has 4 banks of 4096 rows so the run stays short.
//
// Traffic per channel: an attacker alternates two rows of bank 1 in distant
// subarrays (at most two requests in flight, so every request is an ACT),
// mixed with random background requests to banks 0, 2 and 3; each channel
// runs 1200 + 10 x threshold requests.
// For every configuration the bench checks that
//   - the first alert comes exactly at threshold - 5 activations,
//   - no counter is ever written back above the nominal threshold,
//   - every episode issues exactly n RFM_MASKs,
//   - background banks are served during recoveries,
//   - every request completes,
// and prints alerts, episodes and run time per configuration.
module tb_workload_thresholds;
  import prac_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int finished = 0;
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  for (genvar ti = 0; ti < 3; ti++) begin : g_th
    for (genvar ni = 0; ni < 3; ni++) begin : g_n
      localparam int TH = 64 << ti;
      localparam int NRFM = 1 << ni;
      localparam int NREQ = 1200 + 10 * TH;   // enough hammering for several alerts
      logic req_valid = 0, req_ready, done_valid, done_write, abo, recovering;
      mem_req_t req = '0;
      logic [ID_W-1:0] done_id;
      dram_cmd_t cmd;
      logic [NB-1:0] ba_q, stall_mask, bank_rfm_busy;
      logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov, n_episodes,
                   n_rfm, n_mitigations, n_victim_refreshes, n_alerts;
      logic [CNT_W-1:0] dbg_cnt;

      practical_top #(.NB(NB), .ROWS(4096), .NSA(256), .NRFM(NRFM), .TH(TH)) dut (
        .clk, .rst_n, .req_valid, .req, .req_ready, .done_valid, .done_id, .done_write, .cmd,
        .abo, .ba_q, .stall_mask, .recovering, .bank_rfm_busy, .n_act, .n_act_overlap,
        .n_conflict_wait, .n_cap_pre, .n_cmd_in_recov, .n_episodes, .n_rfm, .n_mitigations,
        .n_victim_refreshes, .n_alerts, .dbg_bank(6'd1), .dbg_row(16'd100), .dbg_cnt);

      int max_wb = 0, min_alert = 1000, completed = 0, pushed = 0, hout = 0, t_end = 0;
      bit is_h[256];
      for (genvar b = 0; b < NB; b++) begin : g_mon
        always @(negedge clk) begin
          if (dut.u_dram.g_bank[b].u_bank.wb_valid && int'(dut.u_dram.g_bank[b].u_bank.wb_cnt) > max_wb)
            max_wb = int'(dut.u_dram.g_bank[b].u_bank.wb_cnt);
          if (dut.u_dram.g_bank[b].u_bank.alert_set && int'(dut.u_dram.g_bank[b].u_bank.wb_cnt) < min_alert)
            min_alert = int'(dut.u_dram.g_bank[b].u_bank.wb_cnt);
        end
      end
      always @(negedge clk) begin
        #2;
        if (rst_n && done_valid) begin
          completed++;
          if (is_h[int'(done_id)]) begin is_h[int'(done_id)] = 0; hout--; end
        end
      end

      initial begin
        int hp = 0;
        foreach (is_h[i]) is_h[i] = 0;
        @(posedge rst_n);
        while (pushed < NREQ) begin
          @(negedge clk);
          #1;
          req_valid = 0;
          if ($urandom % 2 == 0) begin
            logic h;
            h = ($urandom % 3 != 0) && hout < 2;
            req = '0;
            req.id = ID_W'(pushed);
            if (h) begin
              req.bank = 6'd1; req.row = (hp % 2 == 0) ? 16'd100 : 16'd3000;
            end else begin
              req.bank = BANK_W'(($urandom % 3 == 0) ? 0 : 2 + $urandom % 2);
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
        while (completed < NREQ || recovering) @(negedge clk);
        t_end = int'($time / 10);
        $display("TH=%0d PRAC-%0d: ACT %0d, alerts %0d, episodes %0d, RFM_MASK %0d, cmds during stalls %0d, first alert at %0d, max count %0d, %0d cycles",
                 TH, NRFM, n_act, n_alerts, n_episodes, n_rfm, n_cmd_in_recov, min_alert, max_wb, t_end);
        ck(min_alert == TH - 5, $sformatf("TH=%0d PRAC-%0d: first alert at %0d", TH, NRFM, min_alert));
        ck(max_wb <= TH, $sformatf("TH=%0d PRAC-%0d: counter reached %0d", TH, NRFM, max_wb));
        ck(n_episodes > 0 && n_rfm == 32'(NRFM) * n_episodes, $sformatf("TH=%0d PRAC-%0d: n RFM_MASKs per episode", TH, NRFM));
        ck(n_cmd_in_recov > 0, $sformatf("TH=%0d PRAC-%0d: background served during recovery", TH, NRFM));
        ck(completed == NREQ, $sformatf("TH=%0d PRAC-%0d: all requests completed", TH, NRFM));
        finished++;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (finished == 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
