// tb_mc_scheduler -- the request queue and command selection on their own
// (4 banks, 4-entry queue, hit cap 2). The bench drives the per-bank state
// inputs directly (open/row/ready flags and the counter-update subarray) and
// looks at the command chosen in each cycle. It checks: no requests before
// boot and none past a full queue; RFM_MASK over MRR over drain over normal
// traffic; the drain PRE skips stalled banks; row hits go first (FR) even
// when younger; the hit cap forces a PRE that is counted; an ACT to the
// updating subarray or its neighbour waits (counted) while one to a distant
// subarray goes and is counted as overlapped; block_act, stall_all and the
// stall mask hold back exactly what they should, and commands to other banks
// during a stall are counted; completions carry the right id; the queue
// keeps arrival order after removals.
module tb_mc_scheduler;
  import prac_pkg::*;
  localparam int NB = 4, QD = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0;
  mem_req_t req = '0;
  logic req_ready;
  logic [SHIFT_W-1:0] sa_shift = 5'd4;      // 16 rows per subarray
  logic [NB-1:0] b_open = '0, b_act_ok = '1, b_rdwr_ok = '1, b_pre_ok = '1, b_upd_busy = '0;
  logic [NB-1:0][ROW_W-1:0] b_row = '0;
  logic [NB-1:0][SA_W-1:0] b_upd_sa = '0;
  logic accept = 0, mrr_req = 0, rfm_req = 0, drain_req = 0, block_act = 0, stall_all = 0;
  logic [NB-1:0] stall_mask = '0;
  dram_cmd_t cmd;
  logic rfm_issued, mrr_issued, done_valid, done_write;
  logic [ID_W-1:0] done_id;
  logic [31:0] n_act, n_act_overlap, n_conflict_wait, n_cap_pre, n_cmd_in_recov;
  int checks = 0, failures = 0;

  mc_scheduler #(.NB(NB), .QD(QD), .CAP(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask
  task automatic step(); @(negedge clk); #1; endtask
  task automatic push(input int id, input int bank, input int row, input logic wr);
    req = '0; req.id = ID_W'(id); req.bank = BANK_W'(bank); req.row = ROW_W'(row);
    req.write = wr; req.col = COL_W'(id);
    req_valid = 1; #1;
    ck(req_ready, $sformatf("request %0d accepted", id));
    step();
    req_valid = 0;
  endtask
  function automatic logic is_cmd(input cmd_op_e op, input int bank);
    return cmd.op == op && int'(cmd.bank) == bank;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1; #1;
    req_valid = 1; #1;
    ck(!req_ready, "no requests before boot");
    req_valid = 0;
    mrr_req = 1; #1;
    ck(cmd.op == CMD_MRR && mrr_issued, "MRR while booting");
    rfm_req = 1; #1;
    ck(cmd.op == CMD_RFM_MASK && rfm_issued, "RFM_MASK has priority");
    rfm_req = 0; mrr_req = 0; accept = 1;
    step();

    // bank 1 row 5 hit, younger than a bank 1 row-conflict request
    b_open[1] = 1; b_row[1] = 16'd5;
    push(10, 1, 37, 0);
    push(11, 1, 5, 1);
    ck(cmd.op == CMD_WR && done_valid && done_id == 11 && done_write, "younger row hit first");
    step();
    ck(is_cmd(CMD_PRE, 1), "then PRE for the conflicting request");
    ck(n_cap_pre == 0, "ordinary PRE not counted as a cap PRE");
    // cap: two hits then PRE despite more hits queued
    push(12, 1, 5, 0);
    b_pre_ok = '0; #1;
    ck(cmd.op == CMD_RD && done_id == 12, "second hit");
    step();
    push(13, 1, 5, 0);
    ck(cmd.op == CMD_NOP, "cap reached, PRE not ready: nothing");
    b_pre_ok = '1; #1;
    ck(is_cmd(CMD_PRE, 1) && int'(cmd.row) == 37, "cap forces PRE for the oldest request");
    step();
    ck(n_cap_pre == 1, "cap PRE counted");
    // queue is [10 (row 37), 13 (row 5)] -- bank now closed, ACT for the oldest
    b_open[1] = 0;
    b_upd_busy[1] = 1; b_upd_sa[1] = 8'd1;            // rows 37, 5: subarrays 2, 0
    #1;
    ck(cmd.op == CMD_NOP, "ACTs to both neighbours of the updating subarray wait");
    step();
    ck(n_conflict_wait == 1, "conflict wait counted");
    b_upd_sa[1] = 8'd2; #1;
    ck(is_cmd(CMD_ACT, 1) && int'(cmd.row) == 5, "ACT to the updating subarray waits, a younger one goes");
    b_upd_sa[1] = 8'd9; #1;
    ck(is_cmd(CMD_ACT, 1) && int'(cmd.row) == 37, "ACT to a distant subarray goes");
    block_act = 1; #1;
    ck(cmd.op == CMD_NOP, "block_act holds the ACT");
    block_act = 0; #1;
    step();
    ck(n_act == 1 && n_act_overlap == 1, "overlapped ACT counted");
    b_upd_busy[1] = 0;
    b_open[1] = 1; b_row[1] = 16'd37; #1;
    ck(cmd.op == CMD_RD && done_id == 10, "request 10 served after its ACT");
    step();
    // fill the queue: 13 is still queued
    push(20, 2, 1, 0);
    push(21, 3, 2, 1);
    b_act_ok = '0; #1;
    push(22, 0, 3, 0);
    req_valid = 1; #1;
    ck(!req_ready, "queue full");
    req_valid = 0;
    ck(cmd.op == CMD_PRE && int'(cmd.bank) == 1, "PRE for request 13 (bank 1 row 5)");
    // stall bank 1: commands go to other banks and are counted
    stall_mask = 4'b0010; b_act_ok = '1; #1;
    ck(is_cmd(CMD_ACT, 2), "bank 1 stalled, ACT to bank 2");
    step();
    ck(n_cmd_in_recov == 1, "command during a bank stall counted");
    stall_all = 1; #1;
    ck(cmd.op == CMD_NOP, "stall_all: nothing");
    drain_req = 1; b_open = 4'b1010; #1;
    ck(is_cmd(CMD_PRE, 3), "drain closes open bank 3, skips stalled bank 1");
    drain_req = 0; stall_all = 0; stall_mask = '0; b_open = 4'b0010; b_row[1] = 16'd5; #1;
    ck(cmd.op == CMD_RD && done_id == 13, "request 13 hit on bank 1");
    step();
    // order kept after removals: 20, 21, 22 remain; all banks closed
    b_open = '0; #1;
    ck(is_cmd(CMD_ACT, 2) && int'(cmd.row) == 1, "oldest remaining (20) first");
    b_act_ok[2] = 0; #1;
    ck(is_cmd(CMD_ACT, 3), "then 21");
    b_act_ok[3] = 0; #1;
    ck(is_cmd(CMD_ACT, 0) && int'(cmd.row) == 3, "then 22");
    // random traffic: every request eventually completes once, banks always ready
    b_act_ok = '1; b_open = '0; step();
    begin
      int done_cnt[256];
      int pushed = 0, completed = 0;
      dram_cmd_t c_seen;
      foreach (done_cnt[i]) done_cnt[i] = 0;
      // drain the three left first
      for (int cyc = 0; cyc < 4000 && completed < 203; cyc++) begin
        if (pushed < 200 && ($urandom % 2) == 0) begin
          req = '0; req.id = ID_W'(pushed + 30); req.bank = BANK_W'($urandom % NB);
          req.row = ROW_W'($urandom % 4); req.write = 1'($urandom);
          req_valid = 1;
        end else req_valid = 0;
        #1;
        if (req_valid && req_ready) pushed++;
        // bank model: ACT opens, PRE closes, everything ready at once
        if (done_valid) begin done_cnt[int'(done_id)]++; completed++; end
        c_seen = cmd;
        @(posedge clk);
        #1;
        if (c_seen.op == CMD_ACT) begin b_open[c_seen.bank[1:0]] = 1; b_row[c_seen.bank[1:0]] = c_seen.row; end
        else if (c_seen.op == CMD_PRE) b_open[c_seen.bank[1:0]] = 0;
        @(negedge clk);
        #1;
      end
      req_valid = 0;
      ck(pushed == 200 && completed == 203, $sformatf("all requests completed (%0d/%0d)", completed, pushed));
      for (int i = 30; i < 230; i++) ck(done_cnt[i] == 1, $sformatf("request %0d completed once", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
