// tb_subarray_decoder -- checks the row -> (subarray, row in subarray) split
// against division and remainder by 2**sa_shift, for random rows and every
// shift up to 16, and the design-point mapping (256 rows per subarray).
module tb_subarray_decoder;
  import prac_pkg::*;
  logic [ROW_W-1:0]   row, local_row;
  logic [SHIFT_W-1:0] sa_shift;
  logic [SA_W-1:0]    sa_id;
  int checks = 0, failures = 0;

  subarray_decoder dut (.row, .sa_shift, .sa_id, .local_row);

  task automatic check(input logic [ROW_W-1:0] r, input int sh);
    int unsigned exp_sa, exp_lr;
    row = r; sa_shift = SHIFT_W'(sh);
    #1;
    exp_sa = (int'(r) / (1 << sh)) % 256;
    exp_lr = int'(r) % (1 << sh);
    checks++;
    if (int'(sa_id) != exp_sa || int'(local_row) != exp_lr) begin
      failures++;
      $display("FAIL row=%0d shift=%0d sa=%0d (exp %0d) local=%0d (exp %0d)",
               r, sh, sa_id, exp_sa, local_row, exp_lr);
    end
  endtask

  initial begin
    check(16'h1234, 8);
    check(16'hFFFF, 8);
    check(16'h0000, 8);
    check(16'h00FF, 8);
    check(16'h0100, 8);
    for (int i = 0; i < 2000; i++) check(ROW_W'($urandom), $urandom_range(0, 16));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
