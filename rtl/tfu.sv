// Tile fusion unit (TFU).
// In blockwise vector quantization every weight block of a row of NBLK
// blocks is replaced by one of NENT codebook entries, named by a 2-bit index.
// Since sum_j A_j x B_idx(j) = sum_e (sum_{j: idx(j)=e} A_j) x B_e, the TFU
// first adds the activation tiles that share an entry, so that each codebook
// entry is fetched and multiplied once per row instead of once per block.
// The fused sums are brought back to INT8 by an arithmetic right shift
// (fuse_shift, rounding half up) with saturation, the "tile fusion + INT8
// quantization" step in front of the 8-bit MAC cluster; the rounding rule is
// this design's choice. used[e] tells which entries occur at all, so unused
// entries can be skipped. Timing: registered, results one cycle after valid.
module tfu #(
  parameter int unsigned NBLK = 8,
  parameter int unsigned NENT = 4,
  parameter int unsigned TW   = 32
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                valid,
  input  logic [NBLK-1:0][$clog2(NENT)-1:0]   idx,
  input  logic [NBLK-1:0][TW-1:0][7:0]        tiles,
  input  logic [3:0]                          fuse_shift,
  output logic                                out_valid,
  output logic [NENT-1:0][TW-1:0][7:0]        fused,
  output logic [NENT-1:0]                     used
);
  localparam int unsigned SW = 8 + $clog2(NBLK) + 1;

  logic [NENT-1:0][TW-1:0][7:0] fused_c;
  logic [NENT-1:0]              used_c;

  always_comb begin
    for (int e = 0; e < NENT; e++) begin
      used_c[e] = 1'b0;
      for (int t = 0; t < TW; t++) begin
        logic signed [SW-1:0] s;
        logic signed [SW-1:0] r;
        s = '0;
        for (int j = 0; j < NBLK; j++)
          if (32'(idx[j]) == e) s = s + SW'($signed(tiles[j][t]));
        if (fuse_shift == 0) r = s;
        else                 r = (s + (SW'(1) <<< (fuse_shift - 1))) >>> fuse_shift;
        if (r > 127)       fused_c[e][t] = 8'd127;
        else if (r < -128) fused_c[e][t] = 8'h80;
        else               fused_c[e][t] = r[7:0];
      end
      for (int j = 0; j < NBLK; j++) if (32'(idx[j]) == e) used_c[e] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; fused <= '0; used <= '0;
    end else begin
      out_valid <= valid;
      if (valid) begin fused <= fused_c; used <= used_c; end
    end
  end
endmodule
