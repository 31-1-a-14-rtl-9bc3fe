// Banked single-port SRAM: NBANKS independent banks of BANK_DEPTH rows x
// WIDTH bits, each with its own enable, write enable, address and data, so
// different units (or the lanes of the tensor engine) reach different banks
// in the same cycle. Read data appears one cycle after the address. Used for
// the 1MB weight buffer (16 x 256 x 2048b) and the 2MB global token buffer
// (16 x 512 x 2048b); the 16-bank split is the paper's, the row width and
// depth are this design's choice to match one codebook block or one row of
// eight 32-byte activation tiles per access.
module sram_banked #(
  parameter int unsigned NBANKS     = 16,
  parameter int unsigned BANK_DEPTH = 256,
  parameter int unsigned WIDTH      = 2048
) (
  input  logic                                    clk,
  input  logic [NBANKS-1:0]                       en,
  input  logic [NBANKS-1:0]                       we,
  input  logic [NBANKS-1:0][$clog2(BANK_DEPTH)-1:0] addr,
  input  logic [NBANKS-1:0][WIDTH-1:0]            wdata,
  output logic [NBANKS-1:0][WIDTH-1:0]            rdata
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    sram_sp #(.DEPTH(BANK_DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk, .en(en[b]), .we(we[b]), .addr(addr[b]), .wdata(wdata[b]), .rdata(rdata[b]));
  end
endmodule
