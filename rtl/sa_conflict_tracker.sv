// sa_conflict_tracker -- the memory controller's copy of "which subarray of
// this bank is still having its PRAC counter updated, and until when".
//
// The DRAM bank finishes the local precharge of a row T_LOCAL cycles after
// PRE and writes the incremented counter back T_UPD cycles after that. An ACT
// to the same subarray, or to a neighbour that shares its sense amplifiers,
// must wait for the whole T_LOCAL + T_UPD (the plain PRAC precharge time,
// 36 ns); an ACT to any other subarray only waits T_LOCAL (15 ns, enforced by
// mc_bank_state). This module keeps the subarray of the last precharged row
// and a down-counter that mirrors the DRAM's increment unit cycle for cycle.
//
// Only the most recent PRE matters: the next PRE of the bank is at least
// T_LOCAL + tRAS after it, and the ACT after that PRE comes later still, when
// the older update has finished.
//
// Timing: pre sampled at the edge ending cycle t -> busy in cycles
// t+1 .. t+T_LOCAL+T_UPD-1. `conflict` tells, combinationally, whether an ACT
// to subarray q_sa in this cycle would collide with the update; the scheduler
// applies the same rule (prac_pkg::sa_conflict) to busy_sa for every queued
// request at once.
module sa_conflict_tracker
  import prac_pkg::*;
#(
  parameter int unsigned SW      = SA_W,
  parameter int unsigned T_LOCAL = T_RP_LOCAL,
  parameter int unsigned T_UPD   = T_CNT_UPD
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pre,
  input  logic [SW-1:0] pre_sa,
  input  logic [SW-1:0] q_sa,
  output logic          busy,
  output logic [SW-1:0] busy_sa,
  output logic          conflict
);

  localparam int unsigned TOTAL = T_LOCAL + T_UPD;

  logic [15:0]   remain;
  logic [SW-1:0] sa_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain <= '0;
      sa_q   <= '0;
    end else if (pre) begin
      remain <= 16'(TOTAL - 1);
      sa_q   <= pre_sa;
    end else if (remain != 0) begin
      remain <= remain - 16'd1;
    end
  end

  always_comb begin
    busy     = (remain != 0);
    busy_sa  = sa_q;
    conflict = busy && ((q_sa == sa_q) ||
                        ({1'b0, q_sa} == {1'b0, sa_q} + 1'b1) ||
                        ({1'b0, sa_q} == {1'b0, q_sa} + 1'b1));
  end

endmodule
