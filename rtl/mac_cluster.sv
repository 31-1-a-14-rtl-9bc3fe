// MAC cluster of the tile-fused tensor engine: ROWS x COLS multipliers.
// Each valid cycle multiplies a signed INT8 activation vector a[ROWS] by a
// signed INT4 codebook block w[ROWS][COLS] and adds the COLS dot products
// into 32-bit accumulators (clr zeroes them, and takes precedence). The
// 32 x 16 size is the paper's; INT8 x INT4 operands follow its W4A8 setting,
// the accumulator width is this design's choice. Result psum is the
// accumulator register, updated at the clock edge.
module mac_cluster #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clr,
  input  logic                            valid,
  input  logic [ROWS-1:0][7:0]            a,
  input  logic [ROWS-1:0][COLS-1:0][3:0]  w,
  output logic [COLS-1:0][31:0]           psum
);
  logic [COLS-1:0][31:0] dot;

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic signed [31:0] s;
      s = '0;
      for (int r = 0; r < ROWS; r++)
        s = s + 32'($signed(a[r]) * $signed(w[r][c]));
      dot[c] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     psum <= '0;
    else if (clr)   psum <= '0;
    else if (valid)
      for (int c = 0; c < COLS; c++) psum[c] <= psum[c] + dot[c];
  end
endmodule
