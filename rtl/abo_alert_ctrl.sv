// abo_alert_ctrl -- DRAM-side Alert Back-Off (ABO) logic with the RFM_MASK
// extension.
//
// ABO: the alert pin `abo` is high while the alert is armed, no recovery
// episode is open and at least one Bank Alert bit is set. It stays high until
// the controller answers with RFM_MASK.
//
// Recovery episode (PRAC-n, n = NRFM): the first RFM_MASK after an alert opens
// the episode. It reads the BA register (`ba_rd`, which clears it), captures
// the read value as the episode mask and starts a mitigation in every bank of
// that mask (`rfm_go`). Each of the following n-1 RFM_MASK commands starts one
// more mitigation in the same banks and returns the same mask. Banks that set
// their BA bit during the episode are left for the next alert, as the paper
// describes ("in the next recovery, this bank also performs necessary
// mitigation"). The n-th RFM_MASK closes the episode.
//
// Re-arming: after the episode the alert may not be raised again until n ACT
// commands have been issued (the "n ACT" window of the ABO timeline). The
// paper's text also says that "one additional ACT is permitted" after the
// RFMs; the n-ACT window of the timeline figure is the one followed here.
//
// Interface: rfm_mask_cmd and act_cmd are one-cycle strobes from the command
// decoder; resp_mask is the value the rank returns for this RFM_MASK
// (combinational, the rank delays it by the register-read latency).
module abo_alert_ctrl #(
  parameter int unsigned NB   = 64,
  parameter int unsigned NRFM = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] ba_value,      // BA register contents
  input  logic          ba_any,
  input  logic          rfm_mask_cmd,
  input  logic          act_cmd,
  output logic          abo,
  output logic          ba_rd,
  output logic [NB-1:0] rfm_go,        // start a mitigation in these banks
  output logic [NB-1:0] resp_mask,
  output logic          in_episode,
  output logic          armed
);

  logic [NB-1:0] ep_mask;
  logic [7:0]    rfm_cnt;
  logic [7:0]    act_cnt;
  logic          in_ep_q, armed_q;

  always_comb begin
    abo        = armed_q && !in_ep_q && ba_any;
    ba_rd      = rfm_mask_cmd && !in_ep_q;
    resp_mask  = in_ep_q ? ep_mask : ba_value;
    rfm_go     = rfm_mask_cmd ? resp_mask : '0;
    in_episode = in_ep_q;
    armed      = armed_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ep_mask <= '0;
      rfm_cnt <= '0;
      act_cnt <= '0;
      in_ep_q <= 1'b0;
      armed_q <= 1'b1;
    end else begin
      if (rfm_mask_cmd) begin
        if (!in_ep_q) ep_mask <= ba_value;
        if (32'(rfm_cnt) + 1 >= NRFM) begin
          // last RFM of the episode: close it, start the ACT window
          in_ep_q <= 1'b0;
          rfm_cnt <= '0;
          armed_q <= 1'b0;
          act_cnt <= '0;
        end else begin
          in_ep_q <= 1'b1;
          rfm_cnt <= rfm_cnt + 8'd1;
        end
      end else if (act_cmd && !armed_q && !in_ep_q) begin
        if (32'(act_cnt) + 1 >= NRFM) armed_q <= 1'b1;
        act_cnt <= act_cnt + 8'd1;
      end
    end
  end

endmodule
