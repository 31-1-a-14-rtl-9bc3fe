// Testbench of the reconfigurable FWHT array: random rows for every size
// k = 1..6, compared with the transform computed from its definition
// y_i = sum_j (-1)^popcount(i & j) x_j within each 2^k-lane group, and a
// check of the one-cycle latency.
module tb_rfa;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] mode_k = 0;
  logic in_valid = 0, out_valid;
  logic [63:0][31:0] in_data = '0, out_data;
  rfa dut (.clk, .rst_n, .mode_k, .in_valid, .in_data, .out_valid, .out_data);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int signed ref_y [64];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 1; k <= 6; k++)
      for (int rep = 0; rep < 5; rep++) begin
        automatic int n2 = 1 << k;
        @(negedge clk);
        mode_k = 3'(k); in_valid = 1;
        for (int l = 0; l < 64; l++) in_data[l] = $urandom_range(0, 200000) - 100000;
        for (int l = 0; l < 64; l++) begin
          automatic int g = l & ~(n2-1); ref_y[l] = 0;
          for (int j = 0; j < n2; j++)
            ref_y[l] += ($countones((l & (n2-1)) & j) % 2) ? -$signed(in_data[g+j]) : $signed(in_data[g+j]);
        end
        @(negedge clk); in_valid = 0;
        checks++; if (!out_valid) failures++;
        for (int l = 0; l < 64; l++) begin
          checks++;
          if ($signed(out_data[l]) != ref_y[l]) begin
            failures++; if (failures < 5) $display("k=%0d lane %0d: %0d vs %0d", k, l, $signed(out_data[l]), ref_y[l]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
