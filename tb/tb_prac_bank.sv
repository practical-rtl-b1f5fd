// tb_prac_bank -- one bank (1024 rows, 16 rows per subarray, alert at 10)
// driven with ACT/PRE/RFM strobes as a controller would issue them. Checks:
// counters are cleared after reset; each ACT+PRE adds exactly one to the row's
// counter, visible 36 cycles after PRE and not before; an ACT to another
// subarray 15 cycles after PRE overlaps the update without losing it; an ACT
// of the same row in the first cycle after the write-back sees the new value; the alert pulse
// comes with the write-back that reaches the threshold; the hottest row is
// tracked; RFM lasts 350 cycles and resets that row's counter; an RFM with
// nothing tracked mitigates nothing. A reference count per row is kept in the
// testbench.
module tb_prac_bank;
  import prac_pkg::*;
  localparam int ROWS = 1024;
  logic clk = 0, rst_n = 0;
  logic [SHIFT_W-1:0] sa_shift = 5'd4;
  logic [CNT_W-1:0] alert_th = 8'd10;
  logic act = 0, pre = 0, rfm = 0;
  logic [ROW_W-1:0] act_row = '0, dbg_row = '0;
  logic init_done, is_open, upd_busy, rfm_busy, alert_set, mit_done, mit_row_valid, hot_valid;
  logic [ROW_W-1:0] open_row, mit_row, hot_row;
  logic [SA_W-1:0] upd_sa;
  logic [CNT_W-1:0] hot_cnt, dbg_cnt;
  int checks = 0, failures = 0, alerts = 0;
  int ref_cnt [ROWS];

  prac_bank #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && alert_set) alerts <= alerts + 1;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic int cnt_of(input int row);
    dbg_row = ROW_W'(row);
    return int'(dut.cnt_mem[row]);
  endfunction

  task automatic do_act(input int row);
    act = 1; act_row = ROW_W'(row);
    @(negedge clk) act = 0;
  endtask
  task automatic do_pre();
    pre = 1;
    @(negedge clk) pre = 0;
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < ROWS; i++) ref_cnt[i] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    while (!init_done) @(negedge clk);
    for (int i = 0; i < ROWS; i += 37) ck(cnt_of(i) == 0, $sformatf("row %0d cleared", i));

    // one activation of row 5: timing of the write-back
    do_act(5); idle(T_RAS - 1);
    do_pre();                      // PRE issued in the previous cycle (t)
    idle(T_RP_PRAC - 2);           // now at cycle t+35
    dbg_row = 5; #1;
    ck(dbg_cnt == 0, "not yet written at t+35");
    @(negedge clk); dbg_row = 5; #1;
    ck(dbg_cnt == 1, "written, visible at t+36");
    ref_cnt[5] = 1;

    // overlap: row 5 (subarray 0) then row 100 (subarray 6) 15 cycles after PRE
    do_act(5); idle(T_RAS - 1); do_pre();
    idle(T_RP_LOCAL - 1);
    ck(upd_busy, "update of row 5 still running");
    do_act(100); idle(T_RAS - 1); do_pre();
    ref_cnt[5]++; ref_cnt[100]++;
    idle(T_RP_PRAC);
    ck(cnt_of(5) == ref_cnt[5] && cnt_of(100) == ref_cnt[100], "overlapped updates both kept");

    // same row right on its write-back cycle: forwarding
    do_act(7); idle(T_RAS - 1); do_pre();
    idle(T_RP_PRAC - 1);           // ACT in cycle t+36, first cycle after the write-back
    do_act(7); idle(T_RAS - 1); do_pre(); idle(T_RP_PRAC);
    ref_cnt[7] += 2;
    ck(cnt_of(7) == 2, $sformatf("same row at the earliest allowed ACT: %0d", cnt_of(7)));
    // hammer row 40 up to the alert threshold
    for (int i = 0; i < 10; i++) begin
      do_act(40); idle(T_RAS - 1); do_pre(); idle(T_RP_PRAC);
      ref_cnt[40]++;
      ck(alerts == ((ref_cnt[40] >= 10) ? 1 : 0), $sformatf("alert count after %0d ACTs", ref_cnt[40]));
    end
    ck(hot_valid && hot_row == 40 && hot_cnt == 10, "row 40 is the hottest");

    // RFM: 350 cycles, resets row 40
    rfm = 1; @(negedge clk) rfm = 0;
    ck(rfm_busy, "RFM busy");
    begin
      int n = 1;
      while (!mit_done && n < 1000) begin @(negedge clk); #1; n++; end
      // mit_done marks the last busy cycle; the bank is free T_RFM after the RFM
      ck(n == T_RFM - 1, $sformatf("RFM finished after %0d cycles", n));
      ck(mit_row_valid && mit_row == 40, "mitigated row 40");
    end
    @(negedge clk); #1;
    ck(!rfm_busy, "bank free T_RFM cycles after the RFM");
    ck(cnt_of(40) == 0 && !hot_valid, "row 40 counter reset, tracker empty");
    ck(!rfm_busy, "RFM over");
    rfm = 1; @(negedge clk) rfm = 0;
    begin
      int n = 1;
      while (!mit_done && n < 1000) begin @(negedge clk); #1; n++; end
      ck(!mit_row_valid, "RFM with nothing tracked mitigates nothing");
    end
    @(negedge clk);
    for (int i = 0; i < ROWS; i++)
      if (cnt_of(i) != ((i == 40) ? 0 : ref_cnt[i])) begin
        ck(0, $sformatf("row %0d count %0d expected %0d", i, cnt_of(i), ref_cnt[i]));
      end
    ck(1, "final sweep");
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
