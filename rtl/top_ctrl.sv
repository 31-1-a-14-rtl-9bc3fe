// Top controller: instruction fetch and dispatch.
// Instructions live in the 64KB ISA buffer (8192 x 64b). The controller
// keeps NCTX program contexts, each a [start, end) range of the ISA buffer
// launched by its own go pulse: context 0 holds the draft-model program,
// context 1 the target-model program, so that during parallel draft-and-
// verify both instruction streams are fed to the scheduler at once. Each
// cycle one active context (round robin) reads its next instruction; one
// cycle later the word is pushed into the scheduler queue named by its qid
// field, or held while that queue is full. ctx_fetched pulses when a
// context has pushed its last instruction. The paper names the top
// controller and the ISA buffer; the context scheme is this design's way of
// feeding two interleaved workloads to the four queues.
module top_ctrl
  import accel_pkg::*;
#(
  parameter int unsigned NCTX = 2,
  parameter int unsigned IAW  = 13
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NCTX-1:0]            go,
  input  logic [NCTX-1:0][IAW-1:0]   pc_start,
  input  logic [NCTX-1:0][IAW:0]     pc_end,
  output logic [NCTX-1:0]            ctx_busy,
  output logic [NCTX-1:0]            ctx_fetched,
  // ISA buffer read port
  output logic                       isa_en,
  output logic [IAW-1:0]             isa_addr,
  input  logic [INSTR_W-1:0]         isa_rdata,
  // scheduler push port
  output logic                       push,
  output instr_t                     push_instr,
  input  logic [NQ-1:0]              push_ready,
  output logic                       full_stall
);
  logic [NCTX-1:0][IAW:0] pc;
  logic                   pend;        // fetched word waiting to be pushed
  logic [$clog2(NCTX)-1:0] pend_ctx, rr, sel;
  logic                   sel_ok;
  instr_t                 word;

  assign word       = instr_t'(isa_rdata);
  assign push       = pend && push_ready[word.qid];
  assign push_instr = word;
  assign full_stall = pend && !push_ready[word.qid];

  // round-robin pick of an active context, only when nothing is pending
  // (the ISA read data is held by the macro while en is low)
  always_comb begin
    sel_ok = 1'b0;
    sel    = rr;
    for (int i = 0; i < NCTX; i++) begin
      logic [$clog2(NCTX)-1:0] c;
      c = rr + $clog2(NCTX)'(i);
      if (!sel_ok && ctx_busy[c]) begin sel_ok = 1'b1; sel = c; end
    end
    if (pend && !push) sel_ok = 1'b0;
  end
  assign isa_en   = sel_ok;
  assign isa_addr = pc[sel][IAW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ctx_busy <= '0; ctx_fetched <= '0; pend <= 1'b0; pend_ctx <= '0; rr <= '0;
    end else begin
      ctx_fetched <= '0;
      if (push) pend <= 1'b0;
      if (push && pc[pend_ctx] == pc_end[pend_ctx] && !ctx_busy[pend_ctx]) ctx_fetched[pend_ctx] <= 1'b1;
      if (sel_ok) begin
        pend     <= 1'b1;
        pend_ctx <= sel;
        rr       <= sel + 1'b1;
        pc[sel]  <= pc[sel] + 1'b1;
        if (pc[sel] + 1'b1 == pc_end[sel]) ctx_busy[sel] <= 1'b0;
      end
      for (int c = 0; c < NCTX; c++)
        if (go[c] && !ctx_busy[c] && !(sel_ok && sel == $clog2(NCTX)'(c))) begin
          pc[c] <= {1'b0, pc_start[c]};
          ctx_busy[c] <= ({1'b0, pc_start[c]} != pc_end[c]);
        end
    end
  end
endmodule
