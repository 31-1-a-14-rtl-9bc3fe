// Tile-fused tensor engine (TFTE): NCL independent lanes, each a tile fusion
// unit plus a 32x16 INT8 x INT4 MAC cluster (16 x 512 MACs), fed lane i from
// global-token-buffer bank i and weight-buffer bank i. All lanes start
// together; each fuses its own row of activation tiles by its own codebook
// indices ("independent token fusion") and fetches only the entries it uses.
// done rises when every lane has finished; out holds the INT8 results and
// fetches the total number of codebook entries read.
module tfte #(
  parameter int unsigned NCL  = 16,
  parameter int unsigned NBLK = 8,
  parameter int unsigned NENT = 4,
  parameter int unsigned TW   = 32,
  parameter int unsigned COLS = 16,
  parameter int unsigned WAW  = 8
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  input  logic                                          start,
  input  logic [NCL-1:0][NBLK-1:0][$clog2(NENT)-1:0]    idx,
  input  logic [NCL-1:0][NBLK-1:0][TW-1:0][7:0]         tiles,
  input  logic [3:0]                                    fuse_shift,
  input  logic [4:0]                                    out_shift,
  input  logic                                          act_relu,
  input  logic [WAW-1:0]                                cb_base,
  output logic [NCL-1:0]                                wb_en,
  output logic [NCL-1:0][WAW-1:0]                       wb_addr,
  input  logic [NCL-1:0][TW-1:0][COLS-1:0][3:0]         wb_rdata,
  output logic                                          busy,
  output logic                                          done,
  output logic [NCL-1:0][COLS-1:0][7:0]                 out,
  output logic [7:0]                                    fetches
);
  logic [NCL-1:0] ldone, finished;
  logic [NCL-1:0][2:0] nf;

  for (genvar i = 0; i < NCL; i++) begin : g_lane
    tfte_lane #(.NBLK(NBLK), .NENT(NENT), .TW(TW), .COLS(COLS), .WAW(WAW)) u_lane (
      .clk, .rst_n, .start(start && !busy), .idx(idx[i]), .tiles(tiles[i]), .fuse_shift,
      .out_shift, .act_relu, .cb_base, .wb_en(wb_en[i]), .wb_addr(wb_addr[i]),
      .wb_rdata(wb_rdata[i]), .done(ldone[i]), .out(out[i]), .nfetch(nf[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; finished <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin busy <= 1'b1; finished <= '0; end
      else if (busy) begin
        if ((finished | ldone) == '1) begin busy <= 1'b0; done <= 1'b1; end
        finished <= finished | ldone;
      end
    end
  end

  always_comb begin
    fetches = '0;
    for (int i = 0; i < NCL; i++) fetches = fetches + 8'(nf[i]);
  end
endmodule
