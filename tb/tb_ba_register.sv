// tb_ba_register -- random set/read traffic on the Bank Alert register checked
// against a reference model: a read returns the bits set so far and clears
// them, a bit set in the cycle of a read stays set, `any` is their OR.
module tb_ba_register;
  localparam int NB = 64;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] set = '0, rd_data, q;
  logic rd = 0, any;
  logic [NB-1:0] model = '0;
  int checks = 0, failures = 0;

  ba_register #(.NB(NB)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      set = '0;
      if ($urandom_range(0, 3) == 0) set[$urandom_range(0, NB - 1)] = 1'b1;
      if ($urandom_range(0, 15) == 0) set = {$urandom, $urandom};
      rd = ($urandom_range(0, 7) == 0);
      #0;
      checks++;
      if (rd_data !== model || q !== model || any !== (|model)) begin
        failures++;
        $display("FAIL cycle %0d: rd_data=%h model=%h", i, rd_data, model);
      end
      model = (rd ? '0 : model) | set;
    end
    // the paper's example: bank 0 alerts, read returns ...0001, then clear
    @(negedge clk) set = '0; rd = 1;
    model = '0;
    @(negedge clk) rd = 0; set = 64'h1;
    @(negedge clk) set = '0;
    checks++;
    if (rd_data !== 64'h1) begin failures++; $display("FAIL bank0 alert"); end
    rd = 1;
    @(negedge clk) rd = 0;
    checks++;
    if (rd_data !== '0 || any) begin failures++; $display("FAIL clear on read"); end
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
