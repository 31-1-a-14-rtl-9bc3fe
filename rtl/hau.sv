// Hadamard accumulation unit (HAU).
// Multiplies a binary +/-1 Hadamard tile by a stack of token rows without
// multipliers, as an outer product: each accumulate step takes one data row
// (the RFA output of token row j) and one column slice h_bits of the npt
// Hadamard matrix covering PES output rows, and every PE p adds the row when
// h_bits[p] is 1 or subtracts it when it is 0 (-1 is stored as 0). After all
// m columns, PE p holds output row p of the tile. Reading a row applies the
// Hadamard normalisation 1/sqrt(n) as a Q1.15 multiply with rounding; the
// fixed-point format is this design's choice for the paper's fused scale.
// h_mask disables PEs of the zero-padding rows of the last tile.
// Timing: accumulate takes effect at the clock edge; out_data is
// combinational from the selected PE.
module hau #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32,
  parameter int unsigned PES   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      acc_valid,
  input  logic [PES-1:0]            h_bits,
  input  logic [PES-1:0]            h_mask,
  input  logic [LANES-1:0][DW-1:0]  data,
  input  logic [15:0]               scale_q15,
  input  logic [$clog2(PES)-1:0]    psum_row,
  output logic [LANES-1:0][DW-1:0]  out_data
);
  logic [LANES-1:0][DW-1:0] psum [PES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < PES; p++) psum[p] <= '0;
    end else if (clr) begin
      for (int p = 0; p < PES; p++) psum[p] <= '0;
    end else if (acc_valid) begin
      for (int p = 0; p < PES; p++)
        if (h_mask[p])
          for (int l = 0; l < LANES; l++)
            psum[p][l] <= h_bits[p] ? psum[p][l] + data[l] : psum[p][l] - data[l];
    end
  end

  // Hadamard scale: round(x * scale / 2^15), ties towards +inf.
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [DW+16:0] prod;
      prod = $signed(psum[psum_row][l]) * $signed({1'b0, scale_q15});
      prod = prod + (DW+17)'(1 << 14);
      out_data[l] = DW'(prod >>> 15);
    end
  end
endmodule
