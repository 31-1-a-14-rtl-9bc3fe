// Testbench of the 32x16 MAC cluster: accumulates several random INT8 x INT4
// products, with a clear in between, and compares every accumulator with
// a plain sum of products.
module tb_mac_cluster;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, valid = 0;
  logic [31:0][7:0] a = '0;
  logic [31:0][15:0][3:0] w = '0;
  logic [15:0][31:0] psum;
  mac_cluster dut (.clk, .rst_n, .clr, .valid, .a, .w, .psum);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int signed acc [16];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int c = 0; c < 16; c++) acc[c] = 0;
      for (int s = 0; s < 1 + rep; s++) begin
        valid = 1;
        for (int r = 0; r < 32; r++) begin
          a[r] = 8'($urandom);
          for (int c = 0; c < 16; c++) w[r][c] = 4'($urandom);
        end
        for (int c = 0; c < 16; c++) for (int r = 0; r < 32; r++) acc[c] += $signed(a[r]) * $signed(w[r][c]);
        @(negedge clk);
      end
      valid = 0;
      for (int c = 0; c < 16; c++) begin
        checks++; if ($signed(psum[c]) != acc[c]) begin failures++; if (failures < 5) $display("col %0d: %0d vs %0d", c, $signed(psum[c]), acc[c]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
