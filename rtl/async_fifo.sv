// Dual-clock FIFO for the ReRAM-to-weight-buffer clock domain crossing.
// Classic Gray-code design: binary write and read pointers with one extra
// wrap bit, converted to Gray code and passed through two-flop synchronizers
// into the other clock domain, where full and empty are computed. DEPTH
// must be a power of two. A write (wr_en while not full) stores wdata at the
// wclk edge; rdata shows the head entry whenever not empty, and rd_en
// pops it at the rclk edge. The paper names asynchronous FIFO groups only;
// the depth and structure here are this design's choice.
module async_fifo #(
  parameter int unsigned W     = 512,
  parameter int unsigned DEPTH = 8
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wr_en,
  input  logic [W-1:0]  wdata,
  output logic          full,
  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          rd_en,
  output logic [W-1:0]  rdata,
  output logic          empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk) if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;

  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[AW-1:0]];
endmodule
