// Testbench of the APSD controller with behavioural draft and target
// models. The target model's greedy output is a fixed pseudo-random token
// sequence G. The draft model guesses G[pos + i] correctly with a set
// probability, and drafts from the position the controller implies
// (after the committed tokens, or, when drafting in parallel, after the
// drafts under verification). The target model returns G where all
// earlier drafts agree. Checks: the committed stream equals G exactly; the
// verifier's accepted counts; that both parallel continuation and fallback
// to short drafting occur; and the draft lengths requested in each mode.
module tb_apsd_ctrl;
  import accel_pkg::*;
  localparam int TOKW = 17, MAXDL = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0; logic [5:0] sdl = 5, ldl = 15; logic [15:0] ntarget = 0;
  apsd_mode_e mode; logic busy, done;
  logic dlm_req, dlm_spec, dlm_done = 0, tlm_req, tlm_done = 0;
  logic [5:0] dlm_len, tlm_len;
  logic [MAXDL-1:0][TOKW-1:0] dlm_tokens = '0, tlm_drafts;
  logic [MAXDL:0][TOKW-1:0] tlm_tokens = '0, commit_tokens;
  logic commit_valid; logic [5:0] commit_n;
  logic [15:0] committed, n_continue, n_revert, n_rejected;
  apsd_ctrl dut (.clk, .rst_n, .start, .cfg_short_dl(sdl), .cfg_long_dl(ldl), .cfg_n_target(ntarget),
    .mode, .busy, .done, .dlm_req, .dlm_len, .dlm_spec, .dlm_done, .dlm_tokens,
    .tlm_req, .tlm_len, .tlm_drafts, .tlm_done, .tlm_tokens,
    .commit_valid, .commit_n, .commit_tokens, .committed, .n_continue, .n_revert, .n_rejected);

  logic [TOKW-1:0] G [4096];
  int pos = 0;          // committed tokens
  int accept_pct = 90;
  int out_n = 0;

  function automatic logic [TOKW-1:0] guess(int p);
    return ($urandom_range(0, 99) < accept_pct) ? G[p] : G[p] ^ 17'h1;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // draft model: from committed position, or speculatively past the drafts under verification
  always @(posedge clk) begin
    if (rst_n && dlm_req) fork
      automatic int base = dlm_spec ? pos + int'(tlm_len) : pos;
      automatic int len = int'(dlm_len);
      automatic bit spec = dlm_spec;
      begin
        checks++;
        if (len != (spec ? int'(ldl) : int'(sdl))) begin failures++; $display("draft length %0d", len); end
        repeat (len) @(posedge clk);
        for (int i = 0; i < MAXDL; i++) dlm_tokens[i] <= (i < len) ? guess(base + i) : '0;
        dlm_done <= 1;
        @(posedge clk) dlm_done <= 0;
      end
    join_none
  end
  // target model: verifies drafts against G
  always @(posedge clk) begin
    if (rst_n && tlm_req) fork
      automatic int l = int'(tlm_len);
      automatic logic [MAXDL-1:0][TOKW-1:0] d = tlm_drafts;
      begin
        automatic bit ok = 1;
        repeat (20) @(posedge clk);
        for (int i = 0; i <= MAXDL; i++) begin
          tlm_tokens[i] <= ok ? G[pos + i] : 17'h1ffff;
          if (i < l && d[i] != G[pos + i]) ok = 0;
        end
        tlm_done <= 1;
        @(posedge clk) tlm_done <= 0;
      end
    join_none
  end
  // committed stream
  always @(posedge clk) if (rst_n && commit_valid) begin
    for (int i = 0; i < int'(commit_n); i++) begin
      checks++;
      if (commit_tokens[i] != G[pos + i]) begin failures++; if (failures < 5) $display("token %0d wrong", pos + i); end
    end
    pos += int'(commit_n);
  end

  initial begin
    for (int i = 0; i < 4096; i++) G[i] = 17'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      accept_pct = (rep == 0) ? 97 : (rep == 1) ? 80 : 93;
      sdl = (rep == 2) ? 6'd8 : 6'd5; ldl = (rep == 2) ? 6'd20 : 6'd15;
      ntarget = 16'd300;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++; if (int'(committed) < 300 - 0 || int'(committed) > 300 + MAXDL) failures++;
      $display("run %0d: committed %0d, continue %0d, revert %0d, rejected %0d", rep, committed, n_continue, n_revert, n_rejected);
      checks++; if (n_continue == 0) begin failures++; $display("parallel draft-and-verify never continued"); end
      checks++; if (n_revert == 0) begin failures++; $display("never fell back to short drafting"); end
      ntarget = 0;
      repeat (30) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
