// Testbench of the single-port SRAM at its local-token-buffer size
// (512 x 2048b): writes random rows to random addresses, reads them back
// with the one-cycle latency, and checks that a cycle without enable keeps
// the read data.
module tb_sram_sp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en = 0, we = 0;
  logic [8:0] addr = 0;
  logic [2047:0] wdata = '0, rdata;
  logic [2047:0] model [512];
  bit written [512];
  sram_sp #(.DEPTH(512), .WIDTH(2048)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 300; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 9'($urandom);
      for (int w = 0; w < 64; w++) wdata[w*32 +: 32] = $urandom;
      model[addr] = wdata; written[addr] = 1;
    end
    for (int i = 0; i < 400; i++) begin
      logic [8:0] a;
      do a = 9'($urandom); while (!written[a]);
      @(negedge clk); en = 1; we = 0; addr = a;
      @(negedge clk); en = 0; addr = 9'($urandom);
      checks++; if (rdata != model[a]) failures++;
      @(negedge clk);
      checks++; if (rdata != model[a]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
