// tb_sa_conflict_tracker -- after a PRE to subarray 10 the tracker must report
// a conflict for subarrays 9, 10 and 11 (same or sharing sense amplifiers) and
// none for 8 or 12, for exactly the cycles t+1 .. t+35 of the 36 ns PRAC
// precharge, then none. Subarray 0 and 255 edges are checked too.
module tb_sa_conflict_tracker;
  import prac_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pre = 0;
  logic [SA_W-1:0] pre_sa = '0, q_sa = '0, busy_sa;
  logic busy, conflict;
  int checks = 0, failures = 0;

  sa_conflict_tracker dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic probe(input int sa, input logic exp, input string msg);
    q_sa = SA_W'(sa); #1;
    ck(conflict == exp, $sformatf("%s (q_sa=%0d)", msg, sa));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    probe(10, 0, "idle: no conflict");
    @(negedge clk) pre = 1; pre_sa = 10;
    @(negedge clk) pre = 0;
    // cycle t+1
    for (int k = 1; k <= 36; k++) begin
      logic inwin;
      inwin = (k <= T_RP_PRAC - 1);
      ck(busy == inwin, $sformatf("busy at t+%0d", k));
      probe(10, inwin, $sformatf("same subarray t+%0d", k));
      probe(9,  inwin, "lower neighbour");
      probe(11, inwin, "upper neighbour");
      probe(8,  0, "two below");
      probe(12, 0, "two above");
      @(negedge clk);
    end
    // edges of the bank
    pre = 1; pre_sa = 0;
    @(negedge clk) pre = 0;
    probe(255, 0, "sa 0 vs 255: no wrap");
    probe(1, 1, "sa 0 vs 1");
    @(negedge clk) pre = 1; pre_sa = 255;
    @(negedge clk) pre = 0;
    probe(0, 0, "sa 255 vs 0: no wrap");
    probe(254, 1, "sa 255 vs 254");
    ck(busy_sa == 255, "busy_sa is the latest");
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
