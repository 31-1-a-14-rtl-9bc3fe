// Testbench of the banked SRAM at weight-buffer size (16 x 256 x 2048b):
// random simultaneous reads and writes on all banks against a model, read
// data checked one cycle after the access.
module tb_sram_banked;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] en = '0, we = '0;
  logic [15:0][7:0] addr = '0;
  logic [15:0][2047:0] wdata = '0, rdata;
  logic [2047:0] model [16][256];
  bit valid [16][256];
  sram_banked #(.NBANKS(16), .BANK_DEPTH(256), .WIDTH(2048)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [15:0] rd_q; logic [15:0][7:0] a_q;
    rd_q = '0; a_q = '0;
    for (int cyc = 0; cyc < 600; cyc++) begin
      @(negedge clk);
      for (int b = 0; b < 16; b++) if (rd_q[b]) begin
        checks++; if (rdata[b] != model[b][a_q[b]]) failures++;
      end
      rd_q = '0;
      for (int b = 0; b < 16; b++) begin
        en[b] = $urandom_range(0, 3) != 0; addr[b] = 8'($urandom_range(0, 63));
        we[b] = !valid[b][addr[b]] || $urandom_range(0, 1) == 1;
        for (int w = 0; w < 64; w++) wdata[b][w*32 +: 32] = $urandom;
        if (en[b] && we[b]) begin model[b][addr[b]] = wdata[b]; valid[b][addr[b]] = 1; end
        if (en[b] && !we[b]) begin rd_q[b] = 1; a_q[b] = addr[b]; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
