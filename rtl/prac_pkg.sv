// prac_pkg -- constants, command encoding and helpers shared by the DRAM
// side and the memory-controller side of the PRACtical design.
//
// All timings are in controller clock cycles. The design runs one command
// slot per cycle and assumes a 1 GHz controller clock, so every timing below
// is the nanosecond figure of the design point (DDR5-3200AN with PRAC):
//   local precharge 15 ns, full PRAC precharge 36 ns (15 ns + 21 ns counter
//   update), tRAS 16 ns, tRTP 5 ns, tWR 10 ns, ABO pre-recovery 180 ns,
//   RFM 350 ns, Bank Alert register read 10 ns.
// The 1 GHz clock, tRCD and the column width are this design's own choices.
//
// Organisation of the design point: 64 banks per channel (2 ranks x 8 bank
// groups x 4 banks), 64K rows per bank, 256 subarrays per bank, 8-bit
// per-row activation counters.
//
// Command bus fields are sized for the largest configuration (64 banks,
// 64K rows); smaller configurations use the low bits.
package prac_pkg;

  // ---- organisation -------------------------------------------------------
  localparam int unsigned N_BANKS       = 64;
  localparam int unsigned ROWS_PER_BANK = 65536;
  localparam int unsigned N_SUBARRAYS   = 256;
  localparam int unsigned CNT_W         = 8;     // per-row counter width

  localparam int unsigned BANK_W = 6;            // command-bus bank field
  localparam int unsigned ROW_W  = 16;           // command-bus row field
  localparam int unsigned SA_W   = 8;            // subarray ID width
  localparam int unsigned COL_W  = 10;           // column field (assumed)
  localparam int unsigned ID_W   = 8;            // request tag width (assumed)
  localparam int unsigned SHIFT_W = 5;           // width of log2(rows/subarray)

  // ---- timings, cycles of 1 ns -------------------------------------------
  localparam int unsigned T_RAS          = 16;
  localparam int unsigned T_RP_LOCAL     = 15;   // precharge without the counter update
  localparam int unsigned T_CNT_UPD      = 21;   // counter update after local precharge
  localparam int unsigned T_RP_PRAC      = T_RP_LOCAL + T_CNT_UPD;  // 36
  localparam int unsigned T_RCD          = 16;   // assumed, not given by the design point
  localparam int unsigned T_RTP          = 5;
  localparam int unsigned T_WR           = 10;
  localparam int unsigned T_PRE_RECOVERY = 180;
  localparam int unsigned T_RFM          = 350;
  localparam int unsigned T_BA_READ      = 10;

  // ---- Rowhammer thresholds ----------------------------------------------
  localparam int unsigned ALERT_TH      = 128;   // evaluated: 64, 128, 256
  localparam int unsigned SAFETY_MARGIN = 5;     // max extra ACTs while another bank recovers
  localparam int unsigned N_RFM         = 2;     // PRAC-n, evaluated: 1, 2, 4

  // ---- command bus ---------------------------------------------------------
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_ACT      = 3'd1,
    CMD_RD       = 3'd2,
    CMD_WR       = 3'd3,
    CMD_PRE      = 3'd4,
    CMD_RFM_MASK = 3'd5,   // recovery + Bank Alert register read
    CMD_MRR      = 3'd6    // read of the subarray-mapping register
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e            op;
    logic [BANK_W-1:0]  bank;
    logic [ROW_W-1:0]   row;
    logic [COL_W-1:0]   col;
  } dram_cmd_t;

  // a memory request entering the controller
  typedef struct packed {
    logic [ID_W-1:0]    id;
    logic               write;
    logic [BANK_W-1:0]  bank;
    logic [ROW_W-1:0]   row;
    logic [COL_W-1:0]   col;
  } mem_req_t;

  // Two subarrays conflict when they are the same or neighbours: in an
  // open-bitline array neighbouring subarrays share sense amplifiers.
  function automatic logic sa_conflict(input logic [SA_W-1:0] a,
                                       input logic [SA_W-1:0] b);
    return (a == b) || ({1'b0, a} == {1'b0, b} + 9'd1) || ({1'b0, b} == {1'b0, a} + 9'd1);
  endfunction

  function automatic logic [SA_W-1:0] sa_of_row(input logic [ROW_W-1:0] row,
                                                 input logic [SHIFT_W-1:0] sa_shift);
    return SA_W'(row >> sa_shift);
  endfunction

endpackage
