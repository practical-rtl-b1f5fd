// tb_mc_bank_state -- issues ACT, RD, WR and PRE to one bank tracker and
// measures, cycle by cycle, when each "ready" signal rises: RD/WR tRCD after
// ACT, PRE tRAS after ACT / tRTP after RD / tWR after WR, ACT 15 cycles after
// PRE (the local precharge), and the counter-update window of 36 cycles with
// the subarray of the closed row (row 0x0A05, 256 rows per subarray -> 10).
module tb_mc_bank_state;
  import prac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [SHIFT_W-1:0] sa_shift = 5'd8;
  logic issue_act = 0, issue_rd = 0, issue_wr = 0, issue_pre = 0;
  logic [ROW_W-1:0] act_row = '0, open_row;
  logic is_open, act_ok, rdwr_ok, pre_ok, upd_busy;
  logic [SA_W-1:0] upd_sa;
  int checks = 0, failures = 0;

  mc_bank_state dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // one-cycle command strobe, driven at the negative edge
  task automatic issue(input int op, input int row);
    act_row = ROW_W'(row);
    issue_act = (op == 1); issue_rd = (op == 2); issue_wr = (op == 3); issue_pre = (op == 4);
    @(negedge clk);
    issue_act = 0; issue_rd = 0; issue_wr = 0; issue_pre = 0;
  endtask

  // cycles after the last command until `which` is high (1 = now, right after)
  function automatic logic sig(input int which);
    case (which)
      0: return act_ok;
      1: return rdwr_ok;
      2: return pre_ok;
      default: return upd_busy;
    endcase
  endfunction
  task automatic wait_sig(input int which, input logic val, output int n);
    n = 1;
    while (sig(which) != val && n < 1000) begin @(negedge clk); n++; end
  endtask

  int n;
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ck(act_ok && !is_open, "idle bank can be activated");
    issue(1, 16'h0A05);
    ck(is_open && open_row == 16'h0A05 && !act_ok, "open after ACT");
    wait_sig(1, 1, n); ck(n == T_RCD, $sformatf("tRCD: RD ready after %0d", n));
    ck(pre_ok == (T_RAS <= T_RCD), "tRAS vs tRCD");
    // RD now (cycle ACT+16): PRE waits tRTP from it, and tRAS
    issue(2, 0);
    wait_sig(2, 1, n); ck(n == T_RTP, $sformatf("tRTP: PRE ready %0d after RD", n));
    issue(3, 0);
    wait_sig(2, 1, n); ck(n == T_WR, $sformatf("tWR: PRE ready %0d after WR", n));
    issue(4, 0);
    ck(!is_open && upd_busy && upd_sa == 8'd10, "PRE starts counter update of subarray 10");
    wait_sig(0, 1, n); ck(n == T_RP_LOCAL, $sformatf("local precharge: ACT ready %0d after PRE", n));
    wait_sig(3, 0, n); ck(n + T_RP_LOCAL - 1 == T_RP_PRAC, $sformatf("update ends %0d after PRE", n + T_RP_LOCAL - 1));
    // tRAS from ACT when nothing else constrains PRE
    issue(1, 16'h0100);
    wait_sig(2, 1, n); ck(n == T_RAS, $sformatf("tRAS: PRE ready %0d after ACT", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
