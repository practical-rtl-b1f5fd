// tb_practical_mc -- the memory controller against a checking DRAM model
// (4 banks, 8-entry queue, PRAC-2, pre-recovery 40 and RFM 60 cycles to keep
// the run short; DRAM timings at their defaults).
//
// The bench answers the boot MRR (16 rows per subarray) and every RFM_MASK
// after 10 cycles, raises ABO now and then and holds it until the next
// RFM_MASK, and answers with a random non-empty bank mask. Every command on
// the bus is checked against the rules the DRAM relies on:
//   ACT: bank closed, >= 15 cycles after its PRE, >= 36 if the new row's
//        subarray is the precharged one or its neighbour, bank not mitigating;
//   RD/WR: open row matches, >= tRCD after the ACT;
//   PRE: >= tRAS after the ACT, >= tRTP after a RD, >= tWR after a WR;
//   RFM_MASK: >= 180 cycles after the ABO, every bank closed for the first of
//        an episode, nothing at all between it and the BA answer, RFM_MASKs of
//        an episode 350 (here 60) cycles apart, no command to a masked bank
//        until the episode's last RFM is over.
// Random requests go in; each must complete exactly once. The run must also
// see ACTs overlapped with a counter update, conflict waits, cap PREs,
// episodes with two RFM_MASKs and commands to unmasked banks during one.
module tb_practical_mc;
  import prac_pkg::*;
  localparam int NB = 4, TP = 40, TM = 60, NREQ = 1500;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0;
  mem_req_t req = '0;
  logic req_ready, done_valid, done_write;
  logic [ID_W-1:0] done_id;
  dram_cmd_t cmd;
  logic abo = 0, resp_valid = 0;
  logic [63:0] resp_data = '0;
  logic booted;
  logic [SHIFT_W-1:0] sa_shift;
  logic [NB-1:0] stall_mask;
  logic recovering;
  logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov, n_episodes, n_rfm;
  int checks = 0, failures = 0;

  practical_mc #(.NB(NB), .QD(8), .CAP(4), .NRFM(2), .T_PRE(TP), .T_MIT(TM)) dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- DRAM model and protocol checker ----------------
  int cyc = 0;
  int b_open[NB], b_row[NB], t_act[NB], t_pre[NB], pre_sa[NB], t_rd[NB], t_wr[NB];
  int busy_until[NB];
  int resp_at = -1, resp_val = 0;
  int abo_at = -1, ep_rfms = 0, t_last_rfm = -1000000, t_ba_wait_end = -1;
  logic [NB-1:0] ep_mask = '0;
  int abo_gap = 300;
  logic abo_en = 1;
  int rfm_pairs = 0, cmds_unmasked = 0;

  initial for (int b = 0; b < NB; b++) begin
    b_open[b] = 0; b_row[b] = 0; t_act[b] = -1000; t_pre[b] = -1000; pre_sa[b] = 0;
    t_rd[b] = -1000; t_wr[b] = -1000; busy_until[b] = -1;
  end

  function automatic int sa(input int row); return row >> 4; endfunction

  always @(negedge clk) if (rst_n) begin
    automatic int b = int'(cmd.bank) % NB;
    cyc++;
    resp_valid = 0;
    if (resp_at == cyc) begin resp_valid = 1; resp_data = 64'(resp_val); end
    if (cmd.op inside {CMD_ACT, CMD_RD, CMD_WR, CMD_PRE}) begin
      ck(cyc >= t_ba_wait_end, "no command while the BA mask is being read");
      ck(!(ep_mask[b] && cyc < busy_until[b]), $sformatf("command to masked bank %0d during mitigation", b));
      if (ep_mask != 0 && !ep_mask[b]) cmds_unmasked++;
    end
    case (cmd.op)
      CMD_ACT: begin
        ck(!b_open[b], "ACT to an open bank");
        ck(cyc - t_pre[b] >= T_RP_LOCAL, "ACT before local precharge is over");
        if (sa_conflict(SA_W'(sa(int'(cmd.row))), SA_W'(pre_sa[b])))
          ck(cyc - t_pre[b] >= T_RP_PRAC, $sformatf("conflicting ACT %0d cycles after PRE", cyc - t_pre[b]));
        b_open[b] = 1; b_row[b] = int'(cmd.row); t_act[b] = cyc;
      end
      CMD_RD, CMD_WR: begin
        ck(b_open[b] && b_row[b] == int'(cmd.row), "RD/WR to a row that is not open");
        ck(cyc - t_act[b] >= T_RCD, "RD/WR before tRCD");
        if (cmd.op == CMD_RD) t_rd[b] = cyc; else t_wr[b] = cyc;
      end
      CMD_PRE: begin
        ck(b_open[b], "PRE to a closed bank");
        ck(cyc - t_act[b] >= T_RAS && cyc - t_rd[b] >= T_RTP && cyc - t_wr[b] >= T_WR, "PRE too early");
        b_open[b] = 0; t_pre[b] = cyc; pre_sa[b] = sa(b_row[b]);
      end
      CMD_MRR: begin resp_at = cyc + T_BA_READ; resp_val = 4; end
      CMD_RFM_MASK: begin
        ck(cyc - t_last_rfm >= TM, "RFM_MASKs too close");
        if (ep_rfms == 0) begin
          ck(abo && cyc - abo_at >= TP, $sformatf("RFM_MASK %0d cycles after ABO", cyc - abo_at));
          for (int i = 0; i < NB; i++) ck(!b_open[i], "first RFM_MASK with a bank open");
          ep_mask = NB'(1 + $urandom % ((1 << NB) - 1));
          resp_val = int'(ep_mask);
          abo = 0;
          t_ba_wait_end = cyc + T_BA_READ + 1;
        end
        for (int i = 0; i < NB; i++) if (ep_mask[i]) busy_until[i] = cyc + TM;
        resp_at = cyc + T_BA_READ;
        ep_rfms++;
        t_last_rfm = cyc;
        if (ep_rfms == 2) begin ep_rfms = 0; rfm_pairs++; end
      end
      default: ;
    endcase
    if (ep_rfms == 0 && cyc >= t_last_rfm + TM) ep_mask = '0;
    // raise ABO now and then, once no episode is running
    if (abo_en && !abo && booted && ep_mask == 0 && ep_rfms == 0 && cyc > t_last_rfm + TM + abo_gap) begin
      abo = 1; abo_at = cyc; abo_gap = 100 + $urandom % 600;
    end
  end

  // ---------------- traffic ----------------
  int done_cnt[256];
  int pushed = 0, completed = 0;
  always @(negedge clk) begin
    #2;
    if (rst_n && done_valid) begin
      done_cnt[int'(done_id)]++;
      completed++;
    end
  end

  initial begin
    foreach (done_cnt[i]) done_cnt[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!booted) @(negedge clk);
    ck(sa_shift == 5'd4, "subarray mapping read at boot");
    while (pushed < NREQ) begin
      @(negedge clk);
      #1;
      req_valid = 0;
      if (pushed < NREQ && ($urandom % 3) == 0) begin
        req = '0;
        // IDs are 8 bits and wrap; completions are counted per id
        req.id = ID_W'(pushed);
        req.bank = BANK_W'($urandom % NB);
        // a few hot rows per bank, spread over nearby and distant subarrays
        req.row = ROW_W'((($urandom % 3) * 17 + ($urandom % 2) * 200) % 256);
        req.write = 1'($urandom % 4 == 0);
        req_valid = 1;
        #1;
        if (req_ready) pushed++;   // accepted at the coming edge
        else req_valid = 0;
      end
    end
    @(negedge clk) req_valid = 0;
    abo_en = 0;
    repeat (3000) @(negedge clk);
    ck(completed == NREQ, $sformatf("all %0d requests completed (%0d)", NREQ, completed));
    for (int i = 0; i < 256; i++)
      ck(done_cnt[i] == NREQ / 256 + ((i < NREQ % 256) ? 1 : 0), $sformatf("id %0d completions", i));
    ck(n_act_overlap > 0, $sformatf("ACTs overlapped with a counter update: %0d", n_act_overlap));
    ck(n_conflict_wait > 0, $sformatf("subarray-conflict waits: %0d", n_conflict_wait));
    ck(n_cap_pre > 0, $sformatf("cap PREs: %0d", n_cap_pre));
    ck(n_episodes > 1 && rfm_pairs == int'(n_episodes) && n_rfm == 2 * n_episodes,
       $sformatf("episodes %0d, RFM_MASK pairs %0d, RFMs %0d", n_episodes, rfm_pairs, n_rfm));
    ck(n_cmd_in_recov > 0 && cmds_unmasked > 0, $sformatf("commands to unmasked banks in recovery: %0d", n_cmd_in_recov));
    $display("acts %0d overlap %0d conflict-wait cycles %0d cap-pre %0d episodes %0d in-recovery cmds %0d",
             n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_episodes, n_cmd_in_recov);
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
