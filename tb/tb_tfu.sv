// Testbench of the tile fusion unit: random indices and INT8 tiles; each
// fused entry must equal the saturated, rounded shifted sum of the tiles
// whose index names it, and used[] must flag exactly the named entries.
module tb_tfu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid = 0, out_valid;
  logic [7:0][1:0] idx = '0;
  logic [7:0][31:0][7:0] tiles = '0;
  logic [3:0] fuse_shift = 0;
  logic [3:0][31:0][7:0] fused;
  logic [3:0] used;
  tfu dut (.clk, .rst_n, .valid, .idx, .tiles, .fuse_shift, .out_valid, .fused, .used);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 200; rep++) begin
      @(negedge clk);
      valid = 1; idx = 16'($urandom); fuse_shift = 4'($urandom_range(0, 3));
      if (rep % 5 == 0) idx = {8{2'($urandom)}};
      for (int j = 0; j < 8; j++) for (int t = 0; t < 32; t++) tiles[j][t] = 8'($urandom);
      @(negedge clk); valid = 0;
      checks++; if (!out_valid) failures++;
      for (int e = 0; e < 4; e++) begin
        automatic bit u = 0;
        for (int j = 0; j < 8; j++) if (idx[j] == 2'(e)) u = 1;
        checks++; if (used[e] != u) failures++;
        for (int t = 0; t < 32; t++) begin
          automatic int s = 0; automatic int r;
          for (int j = 0; j < 8; j++) if (idx[j] == 2'(e)) s += $signed(tiles[j][t]);
          r = (fuse_shift == 0) ? s : ((s + (1 << (fuse_shift - 1))) >>> fuse_shift);
          if (r > 127) r = 127; if (r < -128) r = -128;
          checks++;
          if ($signed(fused[e][t]) != r) begin failures++; if (failures < 5) $display("e%0d t%0d: %0d vs %0d", e, t, $signed(fused[e][t]), r); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
