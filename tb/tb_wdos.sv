// Testbench of the out-of-order scheduler. A random program of 300
// instructions over the four queues is generated with dependency marks:
// an instruction may name daughter queues (producing one token per pair)
// and may consume the oldest pending token of any pair (p -> its queue) by
// naming p as parent. Each token links a consumer to one producer. The four
// units take random times. Checks: every instruction issues exactly once, in
// order within its queue; no consumer issues before its producer completed;
// the counter matrix ends equal to the unconsumed tokens; and both
// out-of-order issue across queues and dependency stalls actually occur.
module tb_wdos;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push = 0; instr_t push_instr = '0;
  logic [3:0] push_ready, issue_valid, unit_done = '0, q_empty, unit_busy, dep_stall;
  instr_t [3:0] issue_instr;
  logic [3:0][3:0][3:0] cnt_matrix;
  wdos dut (.clk, .rst_n, .push, .push_instr, .push_ready, .issue_valid, .issue_instr, .unit_done,
    .q_empty, .unit_busy, .cnt_matrix, .dep_stall);

  localparam int N = 300;
  instr_t prog [N];
  int producer [N][4];   // producer id per parent queue, -1 none
  longint t_issue [N], t_done [N];
  int pending [4][4][$];
  int last_issued [4];
  int n_ooo = 0, n_dep = 0, n_issued = 0;

  function automatic logic [1:0] qi(int q, int i); return mark_to_q(2'(q), 2'(i)); endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // program generation
  initial begin
    for (int n = 0; n < N; n++) begin
      automatic int q = $urandom_range(0, 3);
      prog[n] = '0; prog[n].qid = queue_e'(q); prog[n].payload = PAYLOAD_W'(n);
      for (int i = 0; i < 3; i++) begin
        automatic int p = qi(q, i);
        producer[n][p] = -1;
        if (pending[p][q].size() > 0 && $urandom_range(0, 1) == 1) begin
          prog[n].par[i] = 1'b1; producer[n][p] = pending[p][q].pop_front();
        end
      end
      producer[n][q] = -1;
      for (int i = 0; i < 3; i++)
        if ($urandom_range(0, 3) == 0 && pending[q][qi(q, i)].size() < 10) begin
          prog[n].dau[i] = 1'b1; pending[q][qi(q, i)].push_back(n);
        end
      t_issue[n] = -1; t_done[n] = -1;
    end
  end

  // units
  for (genvar q = 0; q < 4; q++) begin : g_unit
    int left = 0; int cur = -1;
    always @(posedge clk) begin
      unit_done[q] <= 1'b0;
      if (rst_n && issue_valid[q]) begin
        cur = int'(issue_instr[q].payload);
        checks++;
        if (t_issue[cur] != -1 || cur <= last_issued[q] && last_issued[q] != 0) failures++;
        t_issue[cur] = $time / 10; last_issued[q] = cur; n_issued++;
        for (int p = 0; p < 4; p++) if (producer[cur][p] >= 0) begin
          checks++;
          if (t_done[producer[cur][p]] < 0) begin failures++; $display("instr %0d issued before producer %0d done", cur, producer[cur][p]); end
        end
        for (int o = 0; o < cur; o++) if (t_issue[o] < 0) begin n_ooo++; break; end
        left = $urandom_range(1, 8);
      end else if (left > 0) begin
        left--;
        if (left == 0) begin unit_done[q] <= 1'b1; t_done[cur] = $time / 10; end
      end
    end
  end
  always @(posedge clk) if (rst_n && dep_stall != 0) n_dep++;

  initial begin
    for (int q = 0; q < 4; q++) last_issued[q] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      push = 1; push_instr = prog[n];
      while (!push_ready[prog[n].qid]) begin push = 0; @(negedge clk); push = 1; end
    end
    @(negedge clk); push = 0;
    while (n_issued < N) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++; if (n_issued != N) failures++;
    for (int p = 0; p < 4; p++) for (int d = 0; d < 4; d++) begin
      checks++;
      if (int'(cnt_matrix[p][d]) != pending[p][d].size()) begin failures++; $display("cnt[%0d][%0d]=%0d vs %0d", p, d, cnt_matrix[p][d], pending[p][d].size()); end
    end
    checks++; if (n_ooo == 0) failures++;
    checks++; if (n_dep == 0) failures++;
    $display("out-of-order issues %0d, dependency-stall cycles %0d", n_ooo, n_dep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
