// Testbench of the inter-chip transceiver: two instances are connected
// back to back, chip A sending buffer rows and chip B receiving them, with
// random link back-pressure and random buffer grant refusals. Every row
// received must equal the row sent, in order, and the link must carry
// 64 words per 2048-bit row.
module tb_inter_chip_xcvr;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sa = 0, sb = 0, busy_a, busy_b, done_a, done_b;
  logic [12:0] base_a = 13'd40, base_b = 13'd300; logic [13:0] n = 14'd5;
  logic tv, tr; logic [31:0] td;
  logic breq_a, bwe_a, gnt_a, breq_b, bwe_b, gnt_b; logic [12:0] ba_a, ba_b;
  logic [2047:0] wd_a, wd_b, rd_a = '0, rd_b = '0;
  logic [31:0] rx_unused = '0;
  logic tv_b; logic [31:0] td_b;
  inter_chip_xcvr a (.clk, .rst_n, .start(sa), .dir(1'b1), .buf_base(base_a), .nrows(n), .busy(busy_a), .done(done_a),
    .tx_valid(tv), .tx_data(td), .tx_ready(tr), .rx_valid(1'b0), .rx_data(rx_unused),
    .buf_req(breq_a), .buf_we(bwe_a), .buf_addr(ba_a), .buf_wdata(wd_a), .buf_gnt(gnt_a), .buf_rdata(rd_a));
  inter_chip_xcvr dut (.clk, .rst_n, .start(sb), .dir(1'b0), .buf_base(base_b), .nrows(n), .busy(busy_b), .done(done_b),
    .tx_valid(tv_b), .tx_data(td_b), .tx_ready(1'b1), .rx_valid(tv && tr), .rx_data(td),
    .buf_req(breq_b), .buf_we(bwe_b), .buf_addr(ba_b), .buf_wdata(wd_b), .buf_gnt(gnt_b), .buf_rdata(rd_b));
  logic [2047:0] mem_a [8192], mem_b [8192];
  int words = 0;
  assign gnt_a = breq_a && ($urandom_range(0, 2) != 0);
  assign gnt_b = breq_b && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    tr <= ($urandom_range(0, 3) != 0);
    if (rst_n && tv && tr) words++;
    if (rst_n && gnt_a && !bwe_a) rd_a <= mem_a[ba_a];
    if (rst_n && gnt_b && bwe_b) mem_b[ba_b] = wd_b;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 5; r++) for (int w = 0; w < 64; w++) mem_a[40 + r][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); sa = 1; sb = 1; @(negedge clk); sa = 0; sb = 0;
    while (!done_b) @(negedge clk);
    for (int r = 0; r < 5; r++) begin checks++; if (mem_b[300 + r] != mem_a[40 + r]) failures++; end
    checks++; if (words != 5 * 64) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
