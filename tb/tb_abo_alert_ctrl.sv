// tb_abo_alert_ctrl -- the DRAM-side alert protocol with PRAC-2 (n = 2):
// ABO rises when a BA bit is set, the first RFM_MASK reads the register and
// opens the episode (mitigations start in the masked banks, ABO drops), the
// second RFM_MASK repeats the same mask even though another bank has alerted
// meanwhile, and the alert is raised again only after n = 2 ACTs.
module tb_abo_alert_ctrl;
  localparam int NB = 8;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] ba_value = '0, rfm_go, resp_mask;
  logic ba_any, rfm_mask_cmd = 0, act_cmd = 0;
  logic abo, ba_rd, in_episode, armed;
  int checks = 0, failures = 0;

  abo_alert_ctrl #(.NB(NB), .NRFM(2)) dut (.*);
  assign ba_any = |ba_value;
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ck(!abo && armed, "quiet after reset");
    ba_value = 8'b0000_0010;          // bank 1 alerts
    #1 ck(abo, "ABO on BA bit");
    @(negedge clk) rfm_mask_cmd = 1;
    #1 ck(ba_rd && rfm_go == 8'b10 && resp_mask == 8'b10, "first RFM_MASK reads BA");
    @(negedge clk) rfm_mask_cmd = 0; ba_value = 8'b0100_0000;  // BA cleared, bank 6 alerts now
    #1 ck(in_episode && !abo, "episode open, ABO low");
    @(negedge clk) rfm_mask_cmd = 1;
    #1 ck(!ba_rd && rfm_go == 8'b10 && resp_mask == 8'b10, "second RFM_MASK repeats the mask");
    @(negedge clk) rfm_mask_cmd = 0;
    #1 ck(!in_episode && !armed && !abo, "episode closed, waiting for ACTs");
    @(negedge clk) act_cmd = 1;
    @(negedge clk) act_cmd = 0;
    #1 ck(!abo, "one ACT is not enough");
    @(negedge clk) act_cmd = 1;
    @(negedge clk) act_cmd = 0;
    #1 ck(armed && abo, "after n ACTs bank 6's alert is raised");
    @(negedge clk) rfm_mask_cmd = 1;
    #1 ck(ba_rd && rfm_go == 8'b0100_0000, "next episode serves bank 6");
    @(negedge clk) rfm_mask_cmd = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
