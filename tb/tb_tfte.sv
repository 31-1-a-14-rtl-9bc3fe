// Testbench of the tile-fused tensor engine with all 16 lanes. Each lane gets
// random activation tiles, its own random codebook indices and its own
// codebook in a weight-buffer bank model. The result is compared with the
// unfused product sum_j A_j x B_idx(j) (tiles are kept small so fusion needs
// no rescaling), then shifted, saturated and passed through ReLU. The number
// of codebook fetches must equal the number of distinct indices per lane,
// which is the point of tile fusion, and the run time must stay within
// three cycles per fetched entry plus a fixed overhead.
module tb_tfte;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0;
  logic [15:0][7:0][1:0] idx = '0;
  logic [15:0][7:0][31:0][7:0] tiles = '0;
  logic [4:0] out_shift = 0; logic act_relu = 0;
  logic [7:0] cb_base = 0;
  logic [15:0] wb_en; logic [15:0][7:0] wb_addr;
  logic [15:0][31:0][15:0][3:0] wb_rdata = '0;
  logic busy, done; logic [15:0][15:0][7:0] out; logic [7:0] fetches;
  logic [31:0][15:0][3:0] cb [16][4];
  tfte dut (.clk, .rst_n, .start, .idx, .tiles, .fuse_shift(4'd0), .out_shift, .act_relu, .cb_base,
    .wb_en, .wb_addr, .wb_rdata, .busy, .done, .out, .fetches);
  always_ff @(posedge clk)
    for (int i = 0; i < 16; i++) if (wb_en[i]) wb_rdata[i] <= cb[i][2'(wb_addr[i] - cb_base)];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 12; rep++) begin
      automatic int nf = 0, maxu = 0, t0, cyc;
      cb_base = 8'($urandom_range(0, 200)); out_shift = 5'($urandom_range(0, 6)); act_relu = rep[0];
      for (int i = 0; i < 16; i++) begin
        automatic bit [3:0] u = 0;
        for (int e = 0; e < 4; e++) for (int r = 0; r < 32; r++) for (int c = 0; c < 16; c++) cb[i][e][r][c] = 4'($urandom);
        for (int j = 0; j < 8; j++) begin
          idx[i][j] = (rep % 3 == 0) ? 2'(i % 4) : (rep % 3 == 1) ? 2'(j % 2) : 2'($urandom);
          u[idx[i][j]] = 1;
          for (int t = 0; t < 32; t++) tiles[i][j][t] = 8'($urandom_range(0, 30) - 15);
        end
        nf += $countones(u); if ($countones(u) > maxu) maxu = $countones(u);
      end
      @(negedge clk); start = 1; t0 = $time / 10; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      cyc = $time / 10 - t0;
      checks++; if (int'(fetches) != nf) begin failures++; $display("fetches %0d vs %0d", fetches, nf); end
      checks++; if (cyc > 4 + 3 * maxu + (4 - maxu) + 2) begin failures++; $display("cycles %0d for %0d entries", cyc, maxu); end
      for (int i = 0; i < 16; i++) for (int c = 0; c < 16; c++) begin
        automatic int s = 0;
        for (int j = 0; j < 8; j++) for (int r = 0; r < 32; r++) s += $signed(tiles[i][j][r]) * $signed(cb[i][idx[i][j]][r][c]);
        s = s >>> out_shift;
        if (act_relu && s < 0) s = 0;
        if (s > 127) s = 127; if (s < -128) s = -128;
        checks++;
        if ($signed(out[i][c]) != s) begin failures++; if (failures < 5) $display("lane %0d col %0d: %0d vs %0d", i, c, $signed(out[i][c]), s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
