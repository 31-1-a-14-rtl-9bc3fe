// Testbench of the dual-clock FIFO: a 200 MHz writer and a 250 MHz reader
// with random stalls move 2000 random words; order and content are checked
// against a queue, and full/empty must hold the writer and reader back.
module tb_async_fifo;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #2.5 wclk = ~wclk;
  always #2 rclk = ~rclk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] q [$];
  int nread = 0, nfull = 0;
  async_fifo #(.W(64), .DEPTH(8)) dut (.wclk, .wrst_n, .wr_en, .wdata, .full, .rclk, .rrst_n, .rd_en, .rdata, .empty);
  initial begin
    #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #20 wrst_n = 1; rrst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge wclk);
      while (full) begin nfull++; wr_en = 0; @(negedge wclk); end
      wr_en = 1; wdata = {$urandom, $urandom}; q.push_back(wdata);
    end
    @(negedge wclk); wr_en = 0;
  end
  initial begin
    #20;
    while (nread < 2000) begin
      @(negedge rclk);
      rd_en = !empty && ($urandom_range(0, 2) == 0);
      if (rd_en) begin
        checks++;
        if (q.size() == 0 || rdata != q.pop_front()) failures++;
        nread++;
      end
      @(posedge rclk); #0.1 rd_en = 0;
    end
    checks++; if (nfull == 0) begin failures++; $display("full never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
