// tb_increment_unit -- drives PRE hand-overs into the increment unit and
// checks: the write-back comes exactly T_RP_LOCAL + T_CNT_UPD - 1 cycles after
// the start (new value visible 36 cycles after PRE), the value is the input
// plus one and saturates at 255, the alert flag follows the threshold, busy
// covers the update window, and two rows 31 cycles apart (15 ns + tRAS) both
// complete with busy_sa following the most recent one.
module tb_increment_unit;
  import prac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [ROW_W-1:0] start_row = '0;
  logic [SA_W-1:0]  start_sa = '0;
  logic [CNT_W-1:0] start_cnt = '0;
  logic [CNT_W-1:0] alert_th = 8'd123;
  logic busy, bus_active, wb_valid, wb_alert;
  logic [SA_W-1:0] busy_sa, wb_sa;
  logic [ROW_W-1:0] wb_row;
  logic [CNT_W-1:0] wb_cnt;
  int checks = 0, failures = 0;
  int cyc = 0;

  increment_unit dut (.*);

  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // issue a start in the current cycle (held for one clock)
  task automatic go(input int row, input int sa, input int cnt);
    start_row = ROW_W'(row); start_sa = SA_W'(sa); start_cnt = CNT_W'(cnt);
    start = 1;
    @(posedge clk); @(negedge clk);
    start = 0;
  endtask

  // wait for the next write-back, return the number of cycles since t0
  task automatic wait_wb(input int t0, output int dt);
    while (!wb_valid) begin @(posedge clk); @(negedge clk); end
    dt = cyc - t0;
  endtask

  int t0, dt;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    @(posedge clk); @(negedge clk);
    // single update: value + 1, timing
    t0 = cyc;
    go(100, 3, 41);
    ck(busy && busy_sa == 3, "busy after start");
    wait_wb(t0, dt);
    ck(dt == T_RP_LOCAL + T_CNT_UPD - 1, $sformatf("wb at %0d cycles", dt));
    ck(wb_cnt == 42 && wb_row == 100 && wb_sa == 3, "wb value");
    ck(!wb_alert, "no alert below threshold");
    @(posedge clk); @(negedge clk);
    ck(!busy, "idle after write-back");
    // alert at threshold
    go(7, 0, 122);
    wait_wb(cyc, dt);
    ck(wb_cnt == 123 && wb_alert, "alert at threshold");
    @(posedge clk); @(negedge clk);
    // saturation
    go(8, 1, 255);
    wait_wb(cyc, dt);
    ck(wb_cnt == 255, "saturating");
    @(posedge clk); @(negedge clk);
    // two overlapping rows 31 cycles apart
    t0 = cyc;
    go(10, 20, 5);
    repeat (30) @(posedge clk);
    @(negedge clk);
    ck(cyc - t0 == 31, "second start 31 cycles after first");
    go(11, 40, 9);
    ck(busy_sa == 40, "busy_sa follows latest");
    wait_wb(t0, dt);
    ck(dt == 35 && wb_row == 10 && wb_cnt == 6, "first of overlap");
    @(posedge clk); @(negedge clk);
    wait_wb(t0, dt);
    ck(dt == 31 + 35 && wb_row == 11 && wb_cnt == 10, "second of overlap");
    // bus phase is only the last part of the window
    @(posedge clk); @(negedge clk);
    go(12, 2, 0);
    repeat (5) @(posedge clk);
    @(negedge clk) ck(busy && !bus_active, "local precharge phase: bus idle");
    repeat (20) @(posedge clk);
    @(negedge clk) ck(busy && bus_active, "update phase: bus driven");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
