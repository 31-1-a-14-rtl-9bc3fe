// Single-port synchronous SRAM model, written as an array so that synthesis
// maps it onto a memory macro. One access per cycle: a write when we is set,
// otherwise a read whose data appears on rdata one cycle after the address.
// Used for the 128KB local token buffer (512 x 2048b) and the 64KB ISA buffer.
// No byte enables; the contents are not reset, as in a real macro.
module sram_sp #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 2048
) (
  input  logic                      clk,
  input  logic                      en,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  addr,
  input  logic [WIDTH-1:0]          wdata,
  output logic [WIDTH-1:0]          rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
