// Workload-decoupled out-of-order scheduler (WDOS).
// Speculative-decoding work is split into NQ = 4 instruction queues: inter-
// chip transceiver, compute, ReRAM load and external memory (accel_pkg
// queue_e). Each queue is in order; across queues instructions issue out of
// order, ordered only by dependency marks. Every instruction carries a
// 3-bit parent mark and a 3-bit daughter mark naming the other three queues
// (bit i = i-th other queue in ascending order). The intra-queue decoder of
// queue q extracts the marks of its head instruction; the inter-queue
// synchronizer holds column q of a 4x4 synchronous counter matrix
// cnt[parent][daughter]. The head of queue q issues when its unit is idle
// and cnt[p][q] > 0 for every marked parent p; those counters are then
// decremented. When the unit reports the instruction done, cnt[q][d] is
// incremented for every marked daughter d. Matrix, marks and the
// check/decrement/issue/increment sequence follow the paper; the queue
// depth, the counter width and incrementing at completion rather than at
// issue are this design's choices (a daughter must not start on data that
// is not yet produced).
// Interface: push/push_instr enqueue into the queue named by the qid field
// (push_ready per queue); issue_valid[q]/issue_instr[q] is a one-cycle issue
// pulse to unit q, unit_done[q] its completion.
module wdos
  import accel_pkg::*;
#(
  parameter int unsigned QDEPTH = 16,
  parameter int unsigned CW     = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  push,
  input  instr_t                push_instr,
  output logic [NQ-1:0]         push_ready,
  output logic [NQ-1:0]         issue_valid,
  output instr_t [NQ-1:0]       issue_instr,
  input  logic [NQ-1:0]         unit_done,
  output logic [NQ-1:0]         q_empty,
  output logic [NQ-1:0]         unit_busy,
  output logic [NQ-1:0][NQ-1:0][CW-1:0] cnt_matrix,
  output logic [NQ-1:0]         dep_stall    // head waits only for a parent
);
  localparam int unsigned PW = $clog2(QDEPTH);

  instr_t           qmem  [NQ][QDEPTH];
  logic [PW:0]      wp [NQ], rp [NQ];
  logic [2:0]       dau_q [NQ];            // daughters of the in-flight instruction
  logic [NQ-1:0][NQ-1:0][CW-1:0] cnt;
  instr_t [NQ-1:0]  head;
  logic [NQ-1:0]    parents_ok, fire;

  assign cnt_matrix = cnt;

  // intra-queue decoders and issue checks
  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      head[q]        = qmem[q][rp[q][PW-1:0]];
      q_empty[q]     = (wp[q] == rp[q]);
      push_ready[q]  = !((wp[q][PW-1:0] == rp[q][PW-1:0]) && (wp[q][PW] != rp[q][PW]));
      parents_ok[q]  = 1'b1;
      for (int i = 0; i < NQ-1; i++)
        if (head[q].par[i] && cnt[mark_to_q(2'(q), 2'(i))][q] == '0) parents_ok[q] = 1'b0;
      fire[q]        = !q_empty[q] && !unit_busy[q] && parents_ok[q];
      dep_stall[q]   = !q_empty[q] && !unit_busy[q] && !parents_ok[q];
      issue_valid[q] = fire[q];
      issue_instr[q] = head[q];
    end
  end

  always_ff @(posedge clk) begin
    if (push && push_ready[push_instr.qid])
      qmem[push_instr.qid][wp[push_instr.qid][PW-1:0]] <= push_instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int q = 0; q < NQ; q++) begin wp[q] <= '0; rp[q] <= '0; dau_q[q] <= '0; end
      unit_busy <= '0;
      cnt <= '0;
    end else begin
      if (push && push_ready[push_instr.qid]) wp[push_instr.qid] <= wp[push_instr.qid] + 1'b1;
      for (int q = 0; q < NQ; q++) begin
        if (fire[q]) begin
          rp[q] <= rp[q] + 1'b1;
          unit_busy[q] <= 1'b1;
          dau_q[q] <= head[q].dau;
        end else if (unit_done[q]) begin
          unit_busy[q] <= 1'b0;
        end
      end
      // synchronous counter matrix: column q decremented by issue of q,
      // row q incremented by completion of q
      for (int p = 0; p < NQ; p++)
        for (int d = 0; d < NQ; d++) begin
          logic inc, dec;
          inc = 1'b0; dec = 1'b0;
          for (int i = 0; i < NQ-1; i++) begin
            if (unit_done[p] && unit_busy[p] && dau_q[p][i] && mark_to_q(2'(p), 2'(i)) == 2'(d)) inc = 1'b1;
            if (fire[d] && head[d].par[i] && mark_to_q(2'(d), 2'(i)) == 2'(p)) dec = 1'b1;
          end
          if (inc && !dec)      cnt[p][d] <= cnt[p][d] + 1'b1;
          else if (dec && !inc) cnt[p][d] <= cnt[p][d] - 1'b1;
        end
    end
  end

  // a counter must never wrap
  for (genvar p = 0; p < NQ; p++) begin : g_chk_p
    for (genvar d = 0; d < NQ; d++) begin : g_chk_d
      if (d != p) begin : g_off
        localparam int unsigned MI = (d > p) ? d - 1 : d;
        assert property (@(posedge clk) disable iff (!rst_n)
          !(cnt[p][d] == '1 && unit_done[p] && unit_busy[p] && dau_q[p][MI]))
          else $error("wdos: counter [%0d][%0d] overflow", p, d);
      end
    end
  end
endmodule
