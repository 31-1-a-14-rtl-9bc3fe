// Testbench of the instruction fetcher: two program contexts in an ISA
// memory model are launched together; every instruction must reach the
// scheduler push port exactly once, in program order within a context,
// with both contexts interleaved and the queue-full stall exercised.
module tb_top_ctrl;
  import accel_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] go = 0, ctx_busy, ctx_fetched;
  logic [1:0][12:0] pc_start; logic [1:0][13:0] pc_end;
  logic isa_en; logic [12:0] isa_addr; logic [63:0] isa_rdata;
  logic push, full_stall; instr_t push_instr; logic [3:0] push_ready;
  top_ctrl dut (.clk, .rst_n, .go, .pc_start, .pc_end, .ctx_busy, .ctx_fetched, .isa_en, .isa_addr, .isa_rdata,
    .push, .push_instr, .push_ready, .full_stall);
  sram_sp #(.DEPTH(8192), .WIDTH(64)) u_isa (.clk, .en(isa_en || ld_en), .we(ld_en), .addr(ld_en ? ld_addr : isa_addr),
    .wdata(ld_data), .rdata(isa_rdata));
  logic ld_en = 0; logic [12:0] ld_addr = 0; logic [63:0] ld_data = 0;
  int next [2]; int got = 0, nstall = 0, switches = 0, lastctx = -1, nfetched = 0;
  always @(posedge clk) begin
    push_ready <= 4'($urandom) | 4'b0011;
    if (rst_n && full_stall) nstall++;
    if (rst_n && ctx_fetched != 0) nfetched += $countones(ctx_fetched);
    if (rst_n && push) begin
      automatic int c = int'(push_instr.payload[55]);
      automatic int idx = int'(push_instr.payload[15:0]);
      checks++;
      if (idx != next[c] || !push_ready[push_instr.qid]) begin failures++; $display("ctx %0d got %0d want %0d", c, idx, next[c]); end
      next[c]++; got++;
      if (c != lastctx) switches++;
      lastctx = c;
    end
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    instr_t w;
    pc_start[0] = 13'd10; pc_end[0] = 14'd60; pc_start[1] = 13'd1000; pc_end[1] = 14'd1080;
    next[0] = 0; next[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < int'(pc_end[c] - 14'(pc_start[c])); i++) begin
        @(negedge clk);
        w = '0; w.qid = queue_e'($urandom_range(0, 3)); w.payload[55] = 1'(c); w.payload[15:0] = 16'(i);
        ld_en = 1; ld_addr = pc_start[c] + 13'(i); ld_data = w;
      end
    @(negedge clk); ld_en = 0;
    @(negedge clk); go = 2'b11; @(negedge clk); go = 0;
    while (got < 130) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++; if (next[0] != 50 || next[1] != 80) failures++;
    checks++; if (nstall == 0) failures++;
    checks++; if (switches < 20) failures++;
    checks++; if (nfetched != 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
