// Testbench of the dynamic INT8 quantizer: scans a few random rows of
// different magnitude, then checks the scale exponent (smallest s with
// absmax / 2^s <= 127) and every quantized value (round half away from
// zero, saturated) against values computed here.
module tb_dyn_quant;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic clr = 0, scan_valid = 0;
  logic [63:0][31:0] in_data = '0;
  logic [63:0][7:0] q_data;
  logic [4:0] shift;
  dyn_quant dut (.clk, .rst_n, .clr, .scan_valid, .in_data, .q_data, .shift);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int signed rows [3][64];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      automatic int mag = 1 << (3 * rep + 4);
      automatic longint amax = 0; automatic int sh = 0;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      for (int r = 0; r < 3; r++) begin
        for (int l = 0; l < 64; l++) begin
          rows[r][l] = int'($urandom_range(0, 2*mag)) - mag;
          if ((rows[r][l] < 0 ? -longint'(rows[r][l]) : longint'(rows[r][l])) > amax)
            amax = rows[r][l] < 0 ? -longint'(rows[r][l]) : longint'(rows[r][l]);
          in_data[l] = rows[r][l];
        end
        scan_valid = 1; @(negedge clk); scan_valid = 0;
      end
      while ((amax >> sh) > 127) sh++;
      checks++; if (int'(shift) != sh) begin failures++; $display("shift %0d vs %0d", shift, sh); end
      for (int r = 0; r < 3; r++) begin
        for (int l = 0; l < 64; l++) in_data[l] = rows[r][l];
        #1;
        for (int l = 0; l < 64; l++) begin
          automatic longint a = rows[r][l] < 0 ? -longint'(rows[r][l]) : longint'(rows[r][l]);
          automatic longint q = (sh == 0) ? a : (a + (longint'(1) << (sh-1))) >> sh;
          int e;
          if (q > 127) q = 127;
          e = rows[r][l] < 0 ? -int'(q) : int'(q);
          checks++;
          if ($signed(q_data[l]) != e) begin failures++; if (failures < 5) $display("%0d -> %0d vs %0d", rows[r][l], $signed(q_data[l]), e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
