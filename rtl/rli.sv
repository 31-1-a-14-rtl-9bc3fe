// ReRAM load interface (RLI).
// Moves codebook data read from the NDIE stacked ReRAM dies into the weight
// buffer. The 200 MHz stabilizer clock clk2x runs at twice the ReRAM rate:
// its phase flop ph toggles every clk2x cycle and is the 100 MHz clock sent
// to the dies (rr_clk). A die launches a word on the rising edge of rr_clk;
// the RLI samples it on the following clk2x edge, half a ReRAM cycle later,
// when the bus has settled, and pushes it into that die's asynchronous FIFO
// if the die's valid was high. In the weight-buffer clock domain the bank
// write interface waits until every die FIFO and the address FIFO (bank and
// row from the codebook fetcher) hold an entry and the weight buffer is
// free (wb_ready), concatenates the die words (die 0 in the low bits) into
// one weight-buffer row and writes it. The clock ratio and the FIFO groups
// follow the paper; mid-period sampling and die-order packing are this
// design's reading of the "double-rate stabilizer".
module rli #(
  parameter int unsigned NDIE   = 4,
  parameter int unsigned DIE_W  = 512,
  parameter int unsigned NBANKS = 16,
  parameter int unsigned WAW    = 8
) (
  input  logic                          clk2x,      // 200 MHz stabilizer clock
  input  logic                          rst2x_n,
  output logic                          rr_clk,     // 100 MHz ReRAM clock
  input  logic [NDIE-1:0]               rr_valid,   // ReRAM read data valid, per die
  input  logic [NDIE-1:0][DIE_W-1:0]    rr_data,
  input  logic                          clk_wb,     // weight-buffer clock
  input  logic                          rstwb_n,
  input  logic                          addr_valid, // from the codebook fetcher
  input  logic [$clog2(NBANKS)-1:0]     addr_bank,
  input  logic [WAW-1:0]                addr_row,
  output logic                          addr_ready,
  output logic                          wb_we,
  output logic [$clog2(NBANKS)-1:0]     wb_bank,
  output logic [WAW-1:0]                wb_addr,
  output logic [NDIE*DIE_W-1:0]         wb_wdata,
  input  logic                          wb_ready,   // bank write may proceed
  output logic [NDIE-1:0]               overflow
);
  localparam int unsigned BW = $clog2(NBANKS);

  logic [NDIE-1:0] f_empty, f_full, f_wr;
  logic [NDIE-1:0][DIE_W-1:0] f_rdata;
  logic a_empty, a_full, pop;
  logic [BW+WAW-1:0] a_rdata;

  logic ph;
  always_ff @(posedge clk2x or negedge rst2x_n)
    if (!rst2x_n) ph <= 1'b0; else ph <= ~ph;
  assign rr_clk = ph;

  for (genvar d = 0; d < NDIE; d++) begin : g_die
    always_ff @(posedge clk2x or negedge rst2x_n) begin
      if (!rst2x_n) overflow[d] <= 1'b0;
      else if (f_wr[d] && f_full[d]) overflow[d] <= 1'b1;
    end
    assign f_wr[d] = ph && rr_valid[d];

    async_fifo #(.W(DIE_W), .DEPTH(8)) u_fifo (
      .wclk(clk2x), .wrst_n(rst2x_n), .wr_en(f_wr[d]), .wdata(rr_data[d]), .full(f_full[d]),
      .rclk(clk_wb), .rrst_n(rstwb_n), .rd_en(pop), .rdata(f_rdata[d]), .empty(f_empty[d]));
  end

  // write-address FIFO, same clock domain as the bank write interface
  logic [BW+WAW-1:0] amem [8];
  logic [3:0] awp, arp;
  assign a_empty    = (awp == arp);
  assign a_full     = (awp[2:0] == arp[2:0]) && (awp[3] != arp[3]);
  assign addr_ready = !a_full;
  assign a_rdata    = amem[arp[2:0]];
  always_ff @(posedge clk_wb or negedge rstwb_n) begin
    if (!rstwb_n) begin
      awp <= '0; arp <= '0;
    end else begin
      if (addr_valid && !a_full) awp <= awp + 1'b1;
      if (pop) arp <= arp + 1'b1;
    end
  end
  always_ff @(posedge clk_wb) if (addr_valid && !a_full) amem[awp[2:0]] <= {addr_bank, addr_row};

  assign pop = (f_empty == '0) && !a_empty && wb_ready;

  always_ff @(posedge clk_wb or negedge rstwb_n) begin
    if (!rstwb_n) begin
      wb_we <= 1'b0; wb_bank <= '0; wb_addr <= '0; wb_wdata <= '0;
    end else begin
      wb_we <= pop;
      if (pop) begin
        {wb_bank, wb_addr} <= a_rdata;
        wb_wdata <= f_rdata;
      end
    end
  end
endmodule
