// mc_scheduler -- request queue and command scheduler of the memory controller.
//
// Requests (prac_pkg::mem_req_t) enter a QD-entry queue through a valid/ready
// handshake; the queue is kept in arrival order (entry 0 oldest) and compacts
// when a request leaves. Each cycle at most one command goes on the DRAM
// command bus, chosen in this order:
//   1. RFM_MASK when the recovery sequencer asks for it,
//   2. MRR (subarray-mapping register read) while the controller boots,
//   3. PRE of an open bank while the recovery sequencer drains the banks,
//   4. otherwise FR-FCFS with a cap: the oldest request that hits an open row
//      and is ready (the bank has served fewer than CAP hits since its ACT),
//      else the oldest request whose next command is ready: RD/WR on a hit
//      (past the cap only if no older request of that bank waits),
//      PRE on a row conflict (held back while a younger request still hits
//      the open row under the cap), ACT on a closed bank.
// An ACT is ready when mc_bank_state says the bank is closed for T_LOCAL
// (15 ns) and the new row's subarray is neither the subarray whose counter is
// still being updated nor one of its neighbours (prac_pkg::sa_conflict). This
// is the controller half of the subarray-level PRAC update: a non-conflicting
// ACT goes 21 ns earlier than plain PRAC timing allows.
// Banks in stall_mask (under mitigation) get no command; with stall_all no
// bank does; with block_act no ACT is issued.
//
// A request completes when its RD or WR is issued (done_valid/done_id); no
// data is modelled. Queue size 32 and FR-FCFS with a cap of 4 follow the
// evaluated controller; the rest of the policy is this design's.
module mc_scheduler
  import prac_pkg::*;
#(
  parameter int unsigned NB  = N_BANKS,
  parameter int unsigned QD  = 32,
  parameter int unsigned CAP = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      req_valid,
  input  mem_req_t                  req,
  output logic                      req_ready,
  input  logic [SHIFT_W-1:0]        sa_shift,
  input  logic [NB-1:0]             b_open,
  input  logic [NB-1:0][ROW_W-1:0]  b_row,
  input  logic [NB-1:0]             b_act_ok,
  input  logic [NB-1:0]             b_rdwr_ok,
  input  logic [NB-1:0]             b_pre_ok,
  input  logic [NB-1:0]             b_upd_busy,
  input  logic [NB-1:0][SA_W-1:0]   b_upd_sa,
  input  logic                      accept,       // controller booted
  input  logic                      mrr_req,
  input  logic                      rfm_req,
  input  logic                      drain_req,
  input  logic                      block_act,
  input  logic                      stall_all,
  input  logic [NB-1:0]             stall_mask,
  output dram_cmd_t                 cmd,
  output logic                      rfm_issued,
  output logic                      mrr_issued,
  output logic                      done_valid,
  output logic [ID_W-1:0]           done_id,
  output logic                      done_write,
  output logic [31:0]               n_act,
  output logic [31:0]               n_act_overlap,   // ACT while another subarray updates
  output logic [31:0]               n_conflict_wait, // cycles a queued ACT waited on a subarray conflict
  output logic [31:0]               n_cap_pre,       // PREs forced by the hit cap
  output logic [31:0]               n_cmd_in_recov   // commands to other banks during a bank stall
);

  localparam int unsigned QW = $clog2(QD + 1);
  localparam int unsigned IW = (QD > 1) ? $clog2(QD) : 1;

  mem_req_t [QD-1:0] q;
  logic     [QD-1:0] q_v;
  logic     [QW-1:0] count;
  logic [NB-1:0][7:0] hits;      // RD/WR served since the bank's ACT

  logic [IW-1:0] sel;
  dram_cmd_t     c;
  logic          retire;         // selected entry leaves the queue
  logic          cap_pre, conf_seen, overlap;

  function automatic logic bank_stalled(input logic [BANK_W-1:0] b,
                                        input logic [NB-1:0] m, input logic all);
    logic s;
    s = all;
    for (int i = 0; i < NB; i++) if (32'(b) == i && m[i]) s = 1'b1;
    return s;
  endfunction

  // Per-entry view of the queue, all entries in parallel:
  //   e_hit  request hits its bank's open row
  //   e_cand1  row hit, ready, under the cap                      (pass 1)
  //   e_cand2  next command ready: RD/WR on a hit with no older request of
  //            the bank waiting, PRE on a row conflict with no hit left
  //            under the cap, ACT on a closed bank without a subarray
  //            conflict                                          (pass 2)
  // The oldest candidate of pass 1, else of pass 2, is chosen.
  logic [QD-1:0] e_ok, e_hit, e_hitcap, e_older, e_conf, e_cand1, e_cand2;
  logic [NB-1:0] has_hit;        // some request hits the bank's open row under the cap
  logic          found1, found2;
  logic [IW-1:0] sel1, sel2;

  always_comb begin
    for (int i = 0; i < QD; i++) begin
      automatic logic [BANK_W-1:0] b = q[i].bank;
      automatic logic in_range = (32'(b) < NB);
      automatic logic open     = in_range && b_open[b];
      e_ok[i]     = q_v[i] && in_range && !stall_mask[b];
      e_hit[i]    = open && b_row[b] == q[i].row;
      e_hitcap[i] = q_v[i] && e_hit[i] && 32'(hits[b]) < CAP;
      e_cand1[i]  = e_ok[i] && e_hitcap[i] && b_rdwr_ok[b];
      e_older[i]  = 1'b0;
      for (int j = 0; j < i; j++)
        if (e_ok[j] && q[j].bank == b) e_older[i] = 1'b1;
      e_conf[i]   = e_ok[i] && !open && b_act_ok[b] && !block_act && b_upd_busy[b] &&
                    sa_conflict(sa_of_row(q[i].row, sa_shift), b_upd_sa[b]);
    end
    has_hit = '0;
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < QD; i++)
        if (e_hitcap[i] && 32'(q[i].bank) == b) has_hit[b] = 1'b1;
    for (int i = 0; i < QD; i++) begin
      automatic logic [BANK_W-1:0] b = q[i].bank;
      automatic logic open = e_ok[i] && b_open[b];
      e_cand2[i] = e_ok[i] && ((e_hit[i] && b_rdwr_ok[b] && !e_older[i]) ||
                               (open && !e_hit[i] && b_pre_ok[b] && !has_hit[b]) ||
                               (!open && b_act_ok[b] && !block_act && !e_conf[i]));
    end
    found1 = 1'b0; sel1 = '0;
    found2 = 1'b0; sel2 = '0;
    for (int i = QD - 1; i >= 0; i--) begin
      if (e_cand1[i]) begin found1 = 1'b1; sel1 = IW'(i); end
      if (e_cand2[i]) begin found2 = 1'b1; sel2 = IW'(i); end
    end
  end

  always_comb begin
    c         = '0;
    c.op      = CMD_NOP;
    sel       = '0;
    retire    = 1'b0;
    cap_pre   = 1'b0;
    overlap   = 1'b0;
    conf_seen = 1'b0;
    if (rfm_req) begin
      c.op = CMD_RFM_MASK;
    end else if (mrr_req) begin
      c.op = CMD_MRR;
    end else if (drain_req) begin
      for (int b = NB - 1; b >= 0; b--)
        if (b_open[b] && b_pre_ok[b] && !stall_mask[b]) begin
          c.op   = CMD_PRE;
          c.bank = BANK_W'(b);
        end
    end else if (!stall_all) begin
      conf_seen = (e_conf != '0);
      if (found1 || found2) begin
        sel    = found1 ? sel1 : sel2;
        c.bank = q[sel].bank;
        c.row  = q[sel].row;
        c.col  = q[sel].col;
        if (found1 || e_hit[sel2]) begin
          c.op   = q[sel].write ? CMD_WR : CMD_RD;
          retire = 1'b1;
        end else if (b_open[c.bank]) begin
          c.op    = CMD_PRE;
          cap_pre = (32'(hits[c.bank]) >= CAP);
        end else begin
          c.op    = CMD_ACT;
          overlap = b_upd_busy[c.bank];
        end
      end
    end
  end

  assign cmd        = c;
  assign rfm_issued = (c.op == CMD_RFM_MASK);
  assign mrr_issued = (c.op == CMD_MRR);
  assign done_valid = retire;
  assign done_id    = q[sel].id;
  assign done_write = q[sel].write;
  assign req_ready  = accept && (32'(count) < QD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q               <= '0;
      q_v             <= '0;
      count           <= '0;
      hits            <= '0;
      n_act           <= '0;
      n_act_overlap   <= '0;
      n_conflict_wait <= '0;
      n_cap_pre       <= '0;
      n_cmd_in_recov  <= '0;
    end else begin
      automatic mem_req_t [QD-1:0] nq = q;
      automatic logic     [QD-1:0] nv = q_v;
      automatic int               n  = int'(count);
      if (retire) begin
        for (int i = 0; i < QD - 1; i++)
          if (i >= int'(sel)) begin
            nq[i] = nq[i+1];
            nv[i] = nv[i+1];
          end
        nv[QD-1] = 1'b0;
        n = n - 1;
      end
      if (req_valid && req_ready) begin
        nq[n] = req;
        nv[n] = 1'b1;
        n = n + 1;
      end
      q     <= nq;
      q_v   <= nv;
      count <= QW'(n);

      for (int b = 0; b < NB; b++) begin
        if (32'(c.bank) == b && c.op == CMD_ACT) hits[b] <= '0;
        if (32'(c.bank) == b && (c.op == CMD_RD || c.op == CMD_WR) && hits[b] != '1)
          hits[b] <= hits[b] + 8'd1;
      end

      if (c.op == CMD_ACT) n_act <= n_act + 32'd1;
      if (c.op == CMD_ACT && overlap) n_act_overlap <= n_act_overlap + 32'd1;
      if (conf_seen) n_conflict_wait <= n_conflict_wait + 32'd1;
      if (cap_pre) n_cap_pre <= n_cap_pre + 32'd1;
      if (stall_mask != '0 && (c.op == CMD_ACT || c.op == CMD_RD || c.op == CMD_WR || c.op == CMD_PRE))
        n_cmd_in_recov <= n_cmd_in_recov + 32'd1;
    end
  end

  a_no_cmd_to_stalled: assert property (@(posedge clk) disable iff (!rst_n)
      (c.op == CMD_ACT || c.op == CMD_RD || c.op == CMD_WR || c.op == CMD_PRE) |->
      !bank_stalled(c.bank, stall_mask, stall_all && !drain_req));

endmodule
