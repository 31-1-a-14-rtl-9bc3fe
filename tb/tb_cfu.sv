// Testbench of the codebook fetcher: random load commands under random
// ReRAM-ready and address-FIFO-ready back-pressure. Every issued ReRAM read
// must come with the matching bank/row pair, addresses must run in order
// from the command's bases, done must follow the last row, and with no
// back-pressure one row must issue per cycle.
module tb_cfu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done, rr_req, rr_ready = 1, avalid, aready = 1;
  logic [14:0] rr_base = 0, rr_addr; logic [3:0] bank = 0, abank; logic [7:0] wb_base = 0, arow;
  logic [8:0] n_rows = 0;
  cfu dut (.clk, .rst_n, .start, .rr_base, .wb_bank_i(bank), .wb_base, .n_rows, .busy, .done,
    .rr_req, .rr_addr, .rr_ready, .addr_valid(avalid), .addr_bank(abank), .addr_row(arow), .addr_ready(aready));
  int cnt = 0; bit bp = 0;
  always @(posedge clk) begin
    if (rr_req && rst_n) begin
      checks++;
      if (!avalid || rr_addr != 15'(rr_base + cnt) || abank != bank || arow != 8'(wb_base + cnt)) failures++;
      cnt++;
    end
  end
  always @(negedge clk) begin rr_ready = !bp || $urandom_range(0, 2) != 0; aready = !bp || $urandom_range(0, 2) != 0; end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      automatic int t0, cyc;
      bp = rep[0];
      @(negedge clk);
      cnt = 0; rr_base = 15'($urandom); bank = 4'($urandom); wb_base = 8'($urandom); n_rows = 9'($urandom_range(1, 200));
      start = 1; t0 = $time / 10; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      cyc = $time / 10 - t0;
      checks++; if (cnt != int'(n_rows)) begin failures++; $display("rows %0d vs %0d", cnt, n_rows); end
      if (!bp) begin checks++; if (cyc != int'(n_rows) + 1) begin failures++; $display("cycles %0d for %0d rows", cyc, n_rows); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
