// Testbench of the external memory access controller with a DRAM model of
// random latency and readiness and a buffer model that refuses grants at
// random. Loads rows from DRAM and checks every buffer row; stores rows
// back to another DRAM region and checks every DRAM word.
module tb_emac;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, dir = 0, busy, done;
  logic [31:0] dram_base = 0; logic [12:0] buf_base = 0; logic [13:0] nrows = 0;
  logic dram_req, dram_we, dram_ready = 0, dram_rvalid = 0;
  logic [31:0] dram_addr; logic [63:0] dram_wdata, dram_rdata = '0;
  logic buf_req, buf_we, buf_gnt; logic [12:0] buf_addr; logic [2047:0] buf_wdata, buf_rdata = '0;
  emac dut (.clk, .rst_n, .start, .dir, .dram_base, .buf_base, .nrows, .busy, .done,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_ready, .dram_rvalid, .dram_rdata,
    .buf_req, .buf_we, .buf_addr, .buf_wdata, .buf_gnt, .buf_rdata);

  logic [63:0] dram [int unsigned];
  logic [2047:0] bufm [8192];
  logic [31:0] rq [$];
  int stalls = 0;
  function automatic logic [63:0] dval(int unsigned a); return {a * 32'd7919, a ^ 32'hA5A5_5A5A}; endfunction

  assign buf_gnt = buf_req && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    dram_ready <= ($urandom_range(0, 3) != 0);
    dram_rvalid <= 0;
    if (rst_n && dram_req && dram_ready) begin
      if (dram_we) dram[dram_addr] = dram_wdata; else rq.push_back(dram_addr);
    end
    if (rq.size() > 0 && $urandom_range(0, 1) == 1) begin
      automatic int unsigned a = rq.pop_front();
      dram_rvalid <= 1; dram_rdata <= dram.exists(a) ? dram[a] : dval(a);
    end
    if (rst_n && buf_req && !buf_gnt) stalls++;
    if (rst_n && buf_req && buf_gnt) begin
      if (buf_we) bufm[buf_addr] = buf_wdata; else buf_rdata <= bufm[buf_addr];
    end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // load 6 rows
    @(negedge clk); dir = 0; dram_base = 32'h1000; buf_base = 13'd100; nrows = 6; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < 6; r++) for (int b = 0; b < 32; b++) begin
      checks++; if (bufm[100 + r][b*64 +: 64] != dval(32'h1000 + r*32 + b)) failures++;
    end
    // store them to 0x8000
    @(negedge clk); dir = 1; dram_base = 32'h8000; buf_base = 13'd100; nrows = 6; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    for (int r = 0; r < 6; r++) for (int b = 0; b < 32; b++) begin
      checks++;
      if (!dram.exists(32'h8000 + r*32 + b) || dram[32'h8000 + r*32 + b] != dval(32'h1000 + r*32 + b)) failures++;
    end
    checks++; if (stalls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
