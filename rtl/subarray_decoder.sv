// subarray_decoder -- splits a bank row address into a subarray ID and the
// row index inside that subarray.
//
// Both sides of the channel need it: the DRAM uses it as the extra global
// row-address decoder that steers a finished counter update to the right
// subarray's local row buffer, and the memory controller uses it to find the
// subarray of every request before deciding whether an ACT conflicts with a
// counter update still in flight.
//
// The mapping is "consecutive rows form a subarray": subarray = row >>
// sa_shift, with sa_shift = log2(rows per subarray) taken from the DRAM's
// subarray-mapping register (256 rows per subarray at the design point:
// 64K rows / 256 subarrays). The shift form of the mapping is this design's
// choice; the paper states only that the mapping is held in a DRAM register
// the controller reads at boot.
//
// Purely combinational, no latency.
module subarray_decoder
  import prac_pkg::*;
#(
  parameter int unsigned RW = ROW_W,   // row address width
  parameter int unsigned SW = SA_W     // subarray ID width
) (
  input  logic [RW-1:0]      row,
  input  logic [SHIFT_W-1:0] sa_shift,    // log2(rows per subarray)
  output logic [SW-1:0]      sa_id,
  output logic [RW-1:0]      local_row
);

  logic [RW-1:0] mask;

  always_comb begin
    mask      = RW'((64'd1 << sa_shift) - 64'd1);
    sa_id     = SW'(row >> sa_shift);
    local_row = row & mask;
  end

endmodule
