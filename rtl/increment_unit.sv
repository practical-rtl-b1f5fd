// increment_unit -- the centralized PRAC counter increment circuit of one bank.
//
// In plain PRAC the counter read-modify-write sits at the global row buffer
// and the whole bank waits for it (tRP grows from 15 ns to 36 ns). Here the
// incrementer is moved off the global row buffer and tied to the local row
// buffers of all subarrays by a dedicated CNT_W-wire counter data bus, so the
// bank can activate a row in another subarray while the update of the
// previous row is still running.
//
// Operation: `start` (the PRE of an open row) hands over the row's counter,
// row address and subarray ID. The unit waits T_RP_LOCAL cycles (the local
// precharge, during which the row goes back from the global to the local row
// buffer), then increments the counter (saturating at all-ones, this
// design's choice) and drives it on the counter bus for the rest of T_CNT_UPD.
// In the last cycle `wb_valid` is high for one cycle with the new value; the
// owner writes it back at that clock edge.
//
// Timing: start sampled at the edge ending cycle t -> busy in cycles
// t+1 .. t+T_RP_LOCAL+T_CNT_UPD-1, wb_valid in the last of them, so the new
// count is visible from cycle t+36 at the design point. Two rows can be in
// flight (the next PRE can come 15 + 16 = 31 ns after the previous one), so
// the unit has two slots; busy/busy_sa describe the most recent row, the only
// one an ACT can still conflict with.
//
// wb_alert flags that the new count reached `alert_th`, the lowered alert
// threshold at which the bank sets its Bank Alert bit.
module increment_unit
  import prac_pkg::*;
#(
  parameter int unsigned CW       = CNT_W,
  parameter int unsigned RW       = ROW_W,
  parameter int unsigned SW       = SA_W,
  parameter int unsigned T_LOCAL  = T_RP_LOCAL,
  parameter int unsigned T_UPD    = T_CNT_UPD
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [RW-1:0]  start_row,
  input  logic [SW-1:0]  start_sa,
  input  logic [CW-1:0]  start_cnt,
  input  logic [CW-1:0]  alert_th,
  output logic           busy,
  output logic [SW-1:0]  busy_sa,
  output logic           bus_active,   // counter data bus is driven
  output logic           wb_valid,
  output logic [RW-1:0]  wb_row,
  output logic [SW-1:0]  wb_sa,
  output logic [CW-1:0]  wb_cnt,
  output logic           wb_alert
);

  localparam int unsigned TOTAL = T_LOCAL + T_UPD;

  // two slots: a new PRE may arrive while the previous row is still in its
  // counter-update phase (next PRE >= 15 + tRAS = 31 ns after the last one),
  // but the bus phases of two rows never overlap.
  logic [1:0][15:0]   remain;
  logic [1:0][CW-1:0] cnt_q;
  logic [1:0][RW-1:0] row_q;
  logic [1:0][SW-1:0] sa_q;
  logic               last_q;     // slot of the most recent start
  logic               sel;        // slot taking a new start
  logic               fin;        // slot finishing this cycle

  always_comb begin
    // the slot not used by the most recent start holds the older row
    if (remain[~last_q] <= 16'd1) sel = ~last_q;
    else                          sel = last_q;
    fin = (remain[1] == 16'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain <= '0;
      cnt_q  <= '0;
      row_q  <= '0;
      sa_q   <= '0;
      last_q <= 1'b1;
    end else begin
      for (int s = 0; s < 2; s++) begin
        if (start && sel == s[0]) begin
          remain[s] <= 16'(TOTAL - 1);
          cnt_q[s]  <= start_cnt;
          row_q[s]  <= start_row;
          sa_q[s]   <= start_sa;
        end else if (remain[s] != 0) begin
          remain[s] <= remain[s] - 16'd1;
          // end of the local precharge: increment (saturating)
          if (remain[s] == 16'(T_UPD) && cnt_q[s] != '1)
            cnt_q[s] <= cnt_q[s] + 1'b1;
        end
      end
      if (start) last_q <= sel;
    end
  end

  always_comb begin
    busy       = (remain[last_q] != 0);
    busy_sa    = sa_q[last_q];
    bus_active = ((remain[0] != 0) && (remain[0] < 16'(T_UPD))) ||
                 ((remain[1] != 0) && (remain[1] < 16'(T_UPD)));
    wb_valid   = (remain[0] == 16'd1) || (remain[1] == 16'd1);
    wb_row     = row_q[fin];
    wb_sa      = sa_q[fin];
    wb_cnt     = cnt_q[fin];
    wb_alert   = (cnt_q[fin] >= alert_th);
  end

  // never more than two rows in flight, and their bus phases never overlap
  a_slot_free: assert property (@(posedge clk) disable iff (!rst_n)
                                start |-> (remain[0] <= 16'd1 || remain[1] <= 16'd1));
  a_bus_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
      !((remain[0] != 0) && (remain[0] < 16'(T_UPD)) && (remain[1] != 0) && (remain[1] < 16'(T_UPD))));

endmodule
