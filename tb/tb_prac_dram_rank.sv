// tb_prac_dram_rank -- the DRAM side on its command bus (4 banks, 256 rows,
// 16 subarrays, alert threshold 10 lowered by 5, PRAC-2). Checks the MRR
// answer (mapping register, only after counter initialisation, 10 cycles),
// that hammering one row of bank 1 sets only BA bit 1 and raises ABO, that
// RFM_MASK returns the mask after exactly 10 cycles, clears the register,
// drops ABO and mitigates only bank 1 for 350 cycles while bank 2 keeps
// working, that bank 2's alert during the episode waits for the next one, that
// the second RFM_MASK returns the same mask, that the aggressor counter is
// reset with its two victims counted, and that ABO comes back only after two
// ACTs.
module tb_prac_dram_rank;
  import prac_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  dram_cmd_t cmd;
  logic abo, resp_valid, init_done;
  logic [63:0] resp_data;
  logic [NB-1:0] ba_q, bank_open, bank_rfm_busy;
  logic [31:0] mitigations, victim_refreshes, alerts;
  logic [BANK_W-1:0] dbg_bank = '0;
  logic [ROW_W-1:0] dbg_row = '0;
  logic [CNT_W-1:0] dbg_cnt;
  int checks = 0, failures = 0;

  prac_dram_rank #(.NB(NB), .ROWS(256), .NSA(16), .NRFM(2), .TH(10), .MARGIN(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic send(input cmd_op_e op, input int bank, input int row);
    cmd = '0; cmd.op = op; cmd.bank = BANK_W'(bank); cmd.row = ROW_W'(row);
    @(negedge clk);
    cmd = '0; cmd.op = CMD_NOP;
  endtask
  task automatic idle(input int n); repeat (n) @(negedge clk); endtask
  task automatic act_pre(input int bank, input int row);
    send(CMD_ACT, bank, row); idle(T_RAS - 1); send(CMD_PRE, bank, 0); idle(T_RP_PRAC);
  endtask
  // cycles from the command to the response
  task automatic wait_resp(output int n);
    n = 1;
    #1;
    while (!resp_valid && n < 100000) begin @(negedge clk); #1; n++; end
  endtask

  int n;
  initial begin
    cmd = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    send(CMD_MRR, 0, 0);
    wait_resp(n);
    ck(init_done && resp_data == 64'd4, $sformatf("MRR returns log2(16 rows) = %0d", resp_data));
    ck(n >= 256 - 2, $sformatf("MRR waits for counter init (%0d cycles)", n));
    @(negedge clk);
    for (int i = 0; i < 4; i++) act_pre(1, 3);
    ck(!abo && ba_q == 0, "below threshold: no alert");
    act_pre(1, 3);
    ck(abo && ba_q == 4'b0010, "fifth activation: BA bit 1 and ABO");
    ck(int'(dut.g_bank[1].u_bank.cnt_mem[3]) == 5, "row 3 counted 5");
    send(CMD_RFM_MASK, 0, 0);
    ck(bank_rfm_busy == 4'b0010, "only bank 1 mitigates");
    ck(!abo && ba_q == 0, "ABO drops, BA cleared on read");
    wait_resp(n);
    ck(n == T_BA_READ && resp_data == 64'b0010, $sformatf("BA mask after %0d cycles = %b", n, resp_data[3:0]));
    @(negedge clk);
    // bank 2 keeps working during the mitigation and alerts itself
    for (int i = 0; i < 5; i++) act_pre(2, 9);
    ck(ba_q == 4'b0100 && !abo, "bank 2 alert held during the episode");
    ck(bank_rfm_busy == 4'b0010, "bank 1 still mitigating");
    while (bank_rfm_busy[1]) @(negedge clk);
    ck(mitigations == 1 && victim_refreshes == 2, "one mitigation, two victims");
    ck(int'(dut.g_bank[1].u_bank.cnt_mem[3]) == 0, "aggressor counter reset");
    send(CMD_RFM_MASK, 0, 0);
    wait_resp(n);
    ck(resp_data == 64'b0010 && ba_q == 4'b0100, "second RFM_MASK: same mask, BA kept");
    @(negedge clk);
    while (bank_rfm_busy[1]) @(negedge clk);
    ck(mitigations == 1, "second RFM had nothing to mitigate");
    ck(!abo, "not re-armed before ACTs");
    send(CMD_ACT, 0, 20); idle(T_RAS - 1); send(CMD_PRE, 0, 0);
    ck(!abo, "one ACT");
    send(CMD_ACT, 3, 20);
    ck(abo, "re-armed after two ACTs: bank 2 alert raised");
    @(negedge clk);
    ck(alerts == 2, $sformatf("two alert events (%0d)", alerts));
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
