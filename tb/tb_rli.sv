// Testbench of the ReRAM load interface. Four die models are fed row reads
// by a codebook fetcher; the RLI must capture every die word across the
// 200 MHz / core clock crossing and write each weight-buffer row, at the
// bank and row the fetcher gave, with the four die words in die order.
// The core clock (weight-buffer side) is 250 MHz; wb_ready is dropped at
// random to stall the bank writes. Checks every row's content, address and
// count, and that no FIFO overflowed.
module tb_rli;
  logic clk = 0, clk2x = 0, rst_n = 0;
  always #2 clk = ~clk;       // 250 MHz
  always #2.5 clk2x = ~clk2x; // 200 MHz
  int checks = 0, failures = 0;
  logic start = 0, busy, done, rr_req, rr_clk;
  logic [14:0] rr_addr, rr_base = 0;
  logic [3:0] rdy; logic [3:0] rr_valid; logic [3:0][511:0] rr_data;
  logic avalid, aready; logic [3:0] abank, wb_bank_i = 0; logic [7:0] arow, wb_base = 0;
  logic [8:0] n_rows = 0;
  logic wb_we, wb_ready = 1; logic [3:0] wb_bank; logic [7:0] wb_addr; logic [2047:0] wb_wdata;
  logic [3:0] overflow;
  cfu u_cfu (.clk, .rst_n, .start, .rr_base, .wb_bank_i, .wb_base, .n_rows, .busy, .done,
    .rr_req, .rr_addr, .rr_ready(&rdy), .addr_valid(avalid), .addr_bank(abank), .addr_row(arow), .addr_ready(aready));
  for (genvar d = 0; d < 4; d++) begin : g_die
    reram_die_model #(.DIE(d)) u_die (.clk, .req(rr_req), .addr(rr_addr), .ready(rdy[d]),
      .rr_clk, .valid(rr_valid[d]), .data(rr_data[d]));
  end
  rli dut (.clk2x, .rst2x_n(rst_n), .rr_clk, .rr_valid, .rr_data, .clk_wb(clk), .rstwb_n(rst_n),
    .addr_valid(avalid), .addr_bank(abank), .addr_row(arow), .addr_ready(aready),
    .wb_we, .wb_bank, .wb_addr, .wb_wdata, .wb_ready, .overflow);

  function automatic logic [511:0] pattern(int d, int unsigned a);
    logic [511:0] r;
    for (int w = 0; w < 16; w++) r[w*32 +: 32] = a * 32'd2654435761 + d * 40503 + w * 97;
    return r;
  endfunction

  int nwr = 0, nstall = 0;
  always @(posedge clk) begin
    wb_ready <= ($urandom_range(0, 3) != 0);
    if (!wb_ready) nstall++;
    if (wb_we && rst_n) begin
      automatic int unsigned a = rr_base + nwr;
      checks++;
      if (wb_bank != wb_bank_i || wb_addr != 8'(wb_base + nwr)) begin failures++; $display("addr %0d/%0d", wb_bank, wb_addr); end
      for (int d = 0; d < 4; d++) begin
        checks++;
        if (wb_wdata[d*512 +: 512] != pattern(d, a)) begin failures++; if (failures < 5) $display("row %0d die %0d data", nwr, d); end
      end
      nwr++;
    end
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #21 rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk);
      nwr = 0; rr_base = 15'($urandom); wb_bank_i = 4'($urandom); wb_base = 8'($urandom);
      n_rows = 9'(20 + rep * 30); start = 1;
      @(negedge clk); start = 0;
      while (nwr < int'(n_rows)) @(negedge clk);
      repeat (20) @(negedge clk);
      checks++; if (nwr != int'(n_rows)) failures++;
    end
    checks++; if (overflow != 0) failures++;
    checks++; if (nstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
