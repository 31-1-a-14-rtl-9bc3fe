// Adaptive parallel speculative decoding (APSD) controller.
// Decides, round by round, how the draft model (DLM) and the target model
// (TLM) are used, and verifies drafts greedily.
//  * DRAFT: non-parallel drafting of short_dl tokens by the DLM alone.
//  * PARALLEL: the TLM verifies the current drafts while the DLM, at the
//    same time, drafts long_dl tokens that continue them.
// Verification: the TLM returns, for each of the L drafts and one position
// more, the token it would produce there. The accepted count is the length of
// the longest prefix where draft and TLM agree; accepted drafts plus the TLM
// token after them are committed. If all L drafts were accepted and the TLM
// token after them equals the first token of the concurrent draft, parallel
// draft-and-verify continues with the rest of the concurrent draft as the
// next drafts; otherwise the concurrent draft is discarded and the next
// round falls back to DRAFT. This switching rule is the paper's; the
// request/done handshakes, token width and draft-length limit are this
// design's choices. Runs until at least n_target tokens are committed.
module apsd_ctrl
  import accel_pkg::*;
#(
  parameter int unsigned TOKW  = 17,   // 128K vocabulary
  parameter int unsigned MAXDL = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic [5:0]                        cfg_short_dl,
  input  logic [5:0]                        cfg_long_dl,
  input  logic [15:0]                       cfg_n_target,
  output apsd_mode_e                        mode,
  output logic                              busy,
  output logic                              done,
  // draft model
  output logic                              dlm_req,
  output logic [5:0]                        dlm_len,
  output logic                              dlm_spec,     // drafting ahead of unverified tokens
  input  logic                              dlm_done,
  input  logic [MAXDL-1:0][TOKW-1:0]        dlm_tokens,
  // target model
  output logic                              tlm_req,
  output logic [5:0]                        tlm_len,
  output logic [MAXDL-1:0][TOKW-1:0]        tlm_drafts,
  input  logic                              tlm_done,
  input  logic [MAXDL:0][TOKW-1:0]          tlm_tokens,
  // committed output
  output logic                              commit_valid,
  output logic [5:0]                        commit_n,
  output logic [MAXDL:0][TOKW-1:0]          commit_tokens,
  output logic [15:0]                       committed,
  output logic [15:0]                       n_continue,
  output logic [15:0]                       n_revert,
  output logic [15:0]                       n_rejected
);
  typedef enum logic [2:0] {A_IDLE, A_DRAFT_REQ, A_DRAFT_WAIT, A_PAR_REQ, A_PAR_WAIT, A_DECIDE} astate_e;
  astate_e state;

  logic [MAXDL-1:0][TOKW-1:0] drafts, pdrafts;
  logic [5:0]                 ld;
  logic                       got_t, got_d;
  logic [5:0]                 acc;
  logic [MAXDL:0][TOKW-1:0]   tq;

  // longest agreeing prefix
  always_comb begin
    acc = ld;
    for (int i = MAXDL-1; i >= 0; i--)
      if (6'(i) < ld && drafts[i] != tq[i]) acc = 6'(i);
  end

  assign busy       = (state != A_IDLE);
  assign tlm_drafts = drafts;
  assign tlm_len    = ld;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; mode <= M_IDLE; done <= 1'b0;
      dlm_req <= 1'b0; dlm_len <= '0; dlm_spec <= 1'b0; tlm_req <= 1'b0;
      drafts <= '0; pdrafts <= '0; ld <= '0; got_t <= 1'b0; got_d <= 1'b0; tq <= '0;
      commit_valid <= 1'b0; commit_n <= '0; commit_tokens <= '0;
      committed <= '0; n_continue <= '0; n_revert <= '0; n_rejected <= '0;
    end else begin
      done <= 1'b0; dlm_req <= 1'b0; tlm_req <= 1'b0; commit_valid <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          committed <= '0; n_continue <= '0; n_revert <= '0; n_rejected <= '0;
          state <= A_DRAFT_REQ;
        end
        A_DRAFT_REQ: begin
          mode <= M_DRAFT; dlm_req <= 1'b1; dlm_len <= cfg_short_dl; dlm_spec <= 1'b0;
          state <= A_DRAFT_WAIT;
        end
        A_DRAFT_WAIT: if (dlm_done) begin
          drafts <= dlm_tokens; ld <= cfg_short_dl; state <= A_PAR_REQ;
        end
        A_PAR_REQ: begin
          mode <= M_PARALLEL; tlm_req <= 1'b1;
          dlm_req <= 1'b1; dlm_len <= cfg_long_dl; dlm_spec <= 1'b1;
          got_t <= 1'b0; got_d <= 1'b0; state <= A_PAR_WAIT;
        end
        A_PAR_WAIT: begin
          if (tlm_done) begin got_t <= 1'b1; tq <= tlm_tokens; end
          if (dlm_done) begin got_d <= 1'b1; pdrafts <= dlm_tokens; end
          if ((got_t || tlm_done) && (got_d || dlm_done)) state <= A_DECIDE;
        end
        A_DECIDE: begin
          commit_valid <= 1'b1;
          commit_n     <= acc + 6'd1;
          for (int i = 0; i <= MAXDL; i++)
            commit_tokens[i] <= (6'(i) < acc) ? drafts[i] : tq[i];
          committed <= committed + 16'(acc) + 16'd1;
          if (acc == ld && tq[ld] == pdrafts[0]) begin
            n_continue <= n_continue + 1'b1;
            for (int i = 0; i < MAXDL-1; i++) drafts[i] <= pdrafts[i+1];
            drafts[MAXDL-1] <= '0;
            ld <= cfg_long_dl - 6'd1;
            state <= (committed + 16'(acc) + 16'd1 >= cfg_n_target) ? A_IDLE : A_PAR_REQ;
          end else begin
            n_revert   <= n_revert + 1'b1;
            n_rejected <= n_rejected + 16'(ld - acc) + 16'(cfg_long_dl);
            state <= (committed + 16'(acc) + 16'd1 >= cfg_n_target) ? A_IDLE : A_DRAFT_REQ;
          end
          if (committed + 16'(acc) + 16'd1 >= cfg_n_target) begin done <= 1'b1; mode <= M_IDLE; end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // the verifier can only be asked about drafts it can hold
  assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (cfg_short_dl != 0 && cfg_short_dl <= 6'(MAXDL) && cfg_long_dl > 1 && cfg_long_dl <= 6'(MAXDL)))
    else $error("apsd_ctrl: draft length out of range");
endmodule
