// Testbench of the Hadamard accumulation unit: accumulates m random rows
// against a random +/-1 tile with some PEs masked, then reads each PE row
// and compares with sum_j (+/-) row_j times the Q1.15 scale, rounded.
module tb_hau;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, acc_valid = 0;
  logic [3:0] h_bits = 0, h_mask = 0;
  logic [63:0][31:0] data = '0, out_data;
  logic [15:0] scale_q15 = 0;
  logic [1:0] psum_row = 0;
  hau dut (.clk, .rst_n, .clr, .acc_valid, .h_bits, .h_mask, .data, .scale_q15, .psum_row, .out_data);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint signed acc [4][64];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      automatic int m = 5 + rep * 4;
      automatic logic [3:0] mask = (rep == 3) ? 4'b0011 : 4'b1111;
      scale_q15 = 16'($urandom_range(1000, 32767));
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int p = 0; p < 4; p++) for (int l = 0; l < 64; l++) acc[p][l] = 0;
      for (int j = 0; j < m; j++) begin
        acc_valid = 1; h_mask = mask; h_bits = 4'($urandom);
        for (int l = 0; l < 64; l++) data[l] = $urandom_range(0, 2000000) - 1000000;
        for (int p = 0; p < 4; p++) if (mask[p]) for (int l = 0; l < 64; l++)
          acc[p][l] += h_bits[p] ? longint'($signed(data[l])) : -longint'($signed(data[l]));
        @(negedge clk);
      end
      acc_valid = 0;
      for (int p = 0; p < 4; p++) begin
        psum_row = 2'(p); #1;
        for (int l = 0; l < 64; l++) begin
          automatic longint signed e = (acc[p][l] * longint'(scale_q15) + 16384) >>> 15;
          checks++;
          if ($signed(out_data[l]) != int'(e)) begin
            failures++; if (failures < 5) $display("rep %0d pe %0d lane %0d: %0d vs %0d", rep, p, l, $signed(out_data[l]), e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
