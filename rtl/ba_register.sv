// ba_register -- the Bank Alert (BA) register: one bit per bank of the channel
// (64 bits at the design point).
//
// A bank sets its bit when one of its rows reaches the alert threshold. The
// RFM_MASK command reads the register: `rd_data` returns the contents and the
// register is cleared at the same clock edge. A bank that sets its bit in the
// cycle of the read keeps it set (the set wins over the clear), so an alert is
// never lost. Both behaviours follow the paper: "The BA register is reset once
// it is read. After its reset, a bank can set the corresponding bit." The
// same-cycle priority is this design's choice.
//
// Timing: set and rd are sampled at the rising edge; rd_data is combinational
// (the value before the clear). `any` is high while any bit is set.
module ba_register #(
  parameter int unsigned NB = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] set,
  input  logic          rd,
  output logic [NB-1:0] rd_data,
  output logic [NB-1:0] q,
  output logic          any
);

  logic [NB-1:0] ba_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ba_q <= '0;
    else        ba_q <= (rd ? '0 : ba_q) | set;
  end

  always_comb begin
    rd_data = ba_q;
    q       = ba_q;
    any     = |ba_q;
  end

endmodule
