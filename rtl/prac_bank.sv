// prac_bank -- the PRAC (per-row activation counter) side of one DRAM bank.
//
// Every row carries a CW-bit activation counter stored next to its data
// cells. ACT copies the row's counter into the bank's row buffer together with
// the data. PRE hands that value, the row address and its subarray ID to the
// bank's centralized increment unit; the unit finishes the local precharge in
// T_LOCAL cycles and writes the incremented value back through the counter
// data bus T_UPD cycles later, while the bank is already free to activate a
// row of a non-conflicting subarray. The controller guarantees that the same
// or a neighbouring subarray is not activated before the write-back has been
// written (asserted below), so an ACT always reads a current counter.
//
// Alert: when a written-back count reaches alert_th (the alert threshold
// lowered by the safety margin, see prac_dram_rank) the bank pulses
// `alert_set`, which sets its bit in the Bank Alert register. The bank also
// keeps the row with the highest count written back since its last
// mitigation (the aggressor to mitigate).
//
// Recovery: `rfm` starts a mitigation that occupies the bank for T_RFM
// cycles (the RFM cycle itself plus T_RFM-1 busy cycles; the next command may
// come T_RFM cycles after the RFM). At its end the two physical neighbours of the tracked row are
// counted as refreshed and the row's counter is reset to 0; with no tracked
// row the RFM does nothing. Resetting the aggressor's counter and tracking a
// single hottest row are this design's choices: the paper says only that
// recovery refreshes the victims of the row with the highest count.
//
// After reset the counters are cleared one row per cycle (ROWS cycles,
// `init_done` goes high after it); the paper does not describe counter
// initialisation.
//
// Interface: act/pre/rfm are one-cycle command strobes from the rank's
// command decoder. dbg_row/dbg_cnt is an asynchronous read port of the
// counter array used by tests.
module prac_bank
  import prac_pkg::*;
#(
  parameter int unsigned ROWS    = ROWS_PER_BANK,
  parameter int unsigned RW      = ROW_W,
  parameter int unsigned SW      = SA_W,
  parameter int unsigned CW      = CNT_W,
  parameter int unsigned T_LOCAL = T_RP_LOCAL,
  parameter int unsigned T_UPD   = T_CNT_UPD,
  parameter int unsigned T_MIT   = T_RFM
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SHIFT_W-1:0] sa_shift,     // log2(rows per subarray)
  input  logic [CW-1:0]      alert_th,     // count that sets the BA bit
  input  logic               act,
  input  logic [RW-1:0]      act_row,
  input  logic               pre,
  input  logic               rfm,
  output logic               init_done,
  output logic               is_open,
  output logic [RW-1:0]      open_row,
  output logic               upd_busy,     // counter update in flight
  output logic [SW-1:0]      upd_sa,       // its subarray
  output logic               rfm_busy,
  output logic               alert_set,    // pulse: set this bank's BA bit
  output logic               mit_done,     // pulse: an RFM finished
  output logic               mit_row_valid,// ... and it mitigated a row
  output logic [RW-1:0]      mit_row,
  output logic               hot_valid,
  output logic [RW-1:0]      hot_row,
  output logic [CW-1:0]      hot_cnt,
  input  logic [RW-1:0]      dbg_row,
  output logic [CW-1:0]      dbg_cnt
);

  localparam int unsigned AW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [CW-1:0] cnt_mem [ROWS];

  logic [AW-1:0] init_idx;
  logic          rb_valid;         // row buffer holds an open row
  logic [RW-1:0] rb_row;
  logic [CW-1:0] rb_cnt;           // counter field of the row buffer
  logic [15:0]   rfm_remain;

  logic          wb_valid, wb_alert;
  logic [RW-1:0] wb_row;
  logic [CW-1:0] wb_cnt;
  logic [SW-1:0] rb_sa, act_sa;
  logic          mit_fire;

  // global row-address decoder: subarray of the open row (for the update) and
  // of a new ACT (for the conflict assertion)
  subarray_decoder #(.RW(RW), .SW(SW)) u_dec_rb (
    .row(rb_row), .sa_shift(sa_shift), .sa_id(rb_sa), .local_row());
  subarray_decoder #(.RW(RW), .SW(SW)) u_dec_act (
    .row(act_row), .sa_shift(sa_shift), .sa_id(act_sa), .local_row());

  increment_unit #(.CW(CW), .RW(RW), .SW(SW), .T_LOCAL(T_LOCAL), .T_UPD(T_UPD)) u_inc (
    .clk, .rst_n,
    .start(pre && rb_valid), .start_row(rb_row), .start_sa(rb_sa), .start_cnt(rb_cnt),
    .alert_th,
    .busy(upd_busy), .busy_sa(upd_sa), .bus_active(),
    .wb_valid, .wb_row, .wb_sa(), .wb_cnt, .wb_alert);

  assign mit_fire = (rfm_remain == 16'd1);

  // counter array: init sweep, mitigation reset, counter-bus write-back
  always_ff @(posedge clk) begin
    if (!init_done)
      cnt_mem[init_idx] <= '0;
    else if (mit_fire && hot_valid)
      cnt_mem[AW'(hot_row)] <= '0;
    else if (wb_valid)
      cnt_mem[AW'(wb_row)] <= wb_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_idx   <= '0;
      init_done  <= 1'b0;
      rb_valid   <= 1'b0;
      rb_row     <= '0;
      rb_cnt     <= '0;
      rfm_remain <= '0;
      hot_valid  <= 1'b0;
      hot_row    <= '0;
      hot_cnt    <= '0;
    end else begin
      if (!init_done) begin
        init_idx <= init_idx + 1'b1;
        if (32'(init_idx) == ROWS - 1) init_done <= 1'b1;
      end

      if (act) begin
        rb_valid <= 1'b1;
        rb_row   <= act_row;
        rb_cnt   <= cnt_mem[AW'(act_row)];
      end else if (pre) begin
        rb_valid <= 1'b0;
      end

      if (rfm)
        rfm_remain <= 16'(T_MIT - 1);
      else if (rfm_remain != 0)
        rfm_remain <= rfm_remain - 16'd1;

      // hottest row since the last mitigation
      if (mit_fire) begin
        hot_valid <= 1'b0;
        if (wb_valid && !(hot_valid && wb_row == hot_row)) begin
          hot_valid <= 1'b1;
          hot_row   <= wb_row;
          hot_cnt   <= wb_cnt;
        end
      end else if (wb_valid && (!hot_valid || wb_cnt >= hot_cnt || wb_row == hot_row)) begin
        hot_valid <= 1'b1;
        hot_row   <= wb_row;
        hot_cnt   <= wb_cnt;
      end
    end
  end

  always_comb begin
    is_open       = rb_valid;
    open_row      = rb_row;
    rfm_busy      = (rfm_remain != 0);
    alert_set     = wb_valid && wb_alert;
    mit_done      = mit_fire;
    mit_row_valid = mit_fire && hot_valid;
    mit_row       = hot_row;
    dbg_cnt       = cnt_mem[AW'(dbg_row)];
  end

  // protocol rules the controller must keep
  a_act_closed:   assert property (@(posedge clk) disable iff (!rst_n) act |-> !rb_valid && !rfm_busy && init_done);
  a_act_no_conf:  assert property (@(posedge clk) disable iff (!rst_n)
                                   act |-> !(upd_busy && sa_conflict(act_sa, upd_sa)));
  a_rfm_closed:   assert property (@(posedge clk) disable iff (!rst_n) rfm |-> !rb_valid && !rfm_busy);
  a_wb_not_lost:  assert property (@(posedge clk) disable iff (!rst_n) !(wb_valid && (mit_fire && hot_valid)));

endmodule
