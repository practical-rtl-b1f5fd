// tb_abo_recovery_fsm -- the controller's ABO sequence (4 banks, PRAC-2,
// pre-recovery 20 and RFM 30 cycles to keep the run short). The bench plays
// the scheduler and the DRAM: it grants rfm_req at once, drops ABO on the
// first RFM_MASK and answers the register read 10 cycles later. It checks
// the length of the pre-recovery window (normal operation), that draining
// waits for all banks to close, that everything is stalled until the BA mask
// arrives, that then only the masked banks are stalled, the spacing of the
// two RFM_MASKs (T_MIT), that the second needs no global stall, and that the
// episode ends with the mask cleared and the counters right. A second episode
// with a different mask is run to check nothing is left over.
module tb_abo_recovery_fsm;
  import prac_pkg::*;
  localparam int NB = 4, TP = 20, TM = 30;
  logic clk = 0, rst_n = 0;
  logic abo = 0, all_closed = 0, rfm_issued = 0, resp_valid = 0;
  logic [NB-1:0] resp_mask = '0;
  logic block_act, drain_req, rfm_req, stall_all, recovering;
  logic [NB-1:0] stall_mask;
  logic [31:0] episodes, rfm_cmds;
  int checks = 0, failures = 0;

  abo_recovery_fsm #(.NB(NB), .NRFM(2), .T_PRE(TP), .T_MIT(TM)) dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic episode(input logic [NB-1:0] m, input int ep);
    int n;
    abo = 1;
    @(negedge clk); #1;
    ck(recovering && episodes == 32'(ep), "episode started");
    n = 0;
    while (!drain_req && n < 1000) begin
      ck(!block_act && !stall_all && stall_mask == 0, "pre-recovery is normal operation");
      @(negedge clk); #1; n++;
    end
    ck(n == TP - 1, $sformatf("pre-recovery %0d cycles after the ABO cycle", n + 1));
    ck(block_act && !rfm_req, "draining: ACTs blocked, no RFM yet");
    repeat (5) begin @(negedge clk); #1; end
    ck(drain_req && !rfm_req, "still draining while a bank is open");
    all_closed = 1;
    @(negedge clk); #1;
    ck(rfm_req && stall_all && block_act, "first RFM_MASK requested, all stalled");
    rfm_issued = 1; abo = 0;
    @(negedge clk); #1;
    rfm_issued = 0;
    ck(rfm_cmds == 32'(2 * ep - 1), "first RFM counted");
    n = 1;
    repeat (T_BA_READ - 1) begin
      ck(stall_all && !rfm_req, "all banks stalled until the BA mask arrives");
      @(negedge clk); #1; n++;
    end
    resp_valid = 1; resp_mask = m;
    @(negedge clk); #1; n++;
    resp_valid = 0; resp_mask = '0;
    ck(!stall_all && !block_act && stall_mask == m, $sformatf("only masked banks stalled (%b)", stall_mask));
    while (!rfm_req && n < 1000) begin
      ck(stall_mask == m && !stall_all, "mask held during the RFM");
      @(negedge clk); #1; n++;
    end
    ck(n == TM, $sformatf("second RFM_MASK %0d cycles after the first", n));
    ck(!stall_all && !block_act && stall_mask == m, "second RFM_MASK needs no global stall");
    rfm_issued = 1;
    @(negedge clk); #1;
    rfm_issued = 0;
    n = 1;
    while (recovering && n < 1000) begin
      ck(stall_mask == m, "mask held during the second RFM");
      @(negedge clk); #1; n++;
    end
    ck(n == TM, $sformatf("episode ends %0d cycles after the second RFM_MASK", n));
    ck(stall_mask == 0 && !block_act && !rfm_req && rfm_cmds == 32'(2 * ep), "episode closed cleanly");
    all_closed = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    repeat (3) begin @(negedge clk); #1; end
    ck(!recovering && !block_act && !rfm_req && stall_mask == 0, "idle after reset");
    episode(4'b0101, 1);
    repeat (4) @(negedge clk);
    episode(4'b1000, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
