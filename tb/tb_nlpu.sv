// Testbench of the non-linear unit. RMS normalization: outputs compared
// with x_i * 256 / floor(sqrt(mean(x^2))) computed here with real
// arithmetic for the root (checked to within one unit of the integer root);
// softmax: outputs compared with the base-2 piecewise-linear formula and
// with the true softmax (within 6% of full scale), and their sum with
// 65535 (within 64 units). Also checks the row latency.
module tb_nlpu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, softmax = 0, busy, done;
  logic [63:0][31:0] in_row = '0, out_row;
  nlpu dut (.clk, .rst_n, .start, .softmax, .in_row, .busy, .done, .out_row);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 10; rep++) begin
      automatic int t0, cyc;
      softmax = rep[0];
      for (int i = 0; i < 64; i++)
        in_row[i] = softmax ? 32'($urandom_range(0, 2048) - 1024) : 32'($urandom_range(0, 400000) - 200000);
      @(negedge clk); start = 1; t0 = $time / 10; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      cyc = $time / 10 - t0;
      checks++; if (cyc > 64 + 40) begin failures++; $display("latency %0d", cyc); end
      if (!softmax) begin
        automatic real ss = 0; automatic longint r;
        for (int i = 0; i < 64; i++) ss += real'($signed(in_row[i])) * real'($signed(in_row[i]));
        r = longint'($floor($sqrt(ss / 64.0)));
        for (int i = 0; i < 64; i++) begin
          automatic real lo = real'($signed(in_row[i])) * 256.0 / real'(r + 1);
          automatic real hi = real'($signed(in_row[i])) * 256.0 / real'(r - 1);
          automatic real y = real'($signed(out_row[i]));
          checks++;
          if (!((y >= lo - 1 && y <= hi + 1) || (y <= lo + 1 && y >= hi - 1))) begin failures++; if (failures < 5) $display("rms lane %0d: %0f", i, y); end
        end
      end else begin
        automatic real zs = 0; automatic longint sum = 0; automatic int mx = -100000;
        for (int i = 0; i < 64; i++) if ($signed(in_row[i]) > mx) mx = $signed(in_row[i]);
        for (int i = 0; i < 64; i++) zs += $exp(real'($signed(in_row[i]) - mx) / 256.0);
        for (int i = 0; i < 64; i++) begin
          automatic real p = $exp(real'($signed(in_row[i]) - mx) / 256.0) / zs;
          sum += out_row[i];
          checks++;
          if ((real'(out_row[i]) / 65535.0 - p) > 0.06 || (p - real'(out_row[i]) / 65535.0) > 0.06) begin failures++; if (failures < 5) $display("softmax lane %0d: %0d vs %0f", i, out_row[i], p); end
        end
        checks++; if (sum > 65535 || sum < 65535 - 64) begin failures++; $display("softmax sum %0d", sum); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
