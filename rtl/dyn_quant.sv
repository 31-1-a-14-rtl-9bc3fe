// Dynamic INT8 quantizer of the local rotation unit.
// Works in two passes over a rotated token. During the scan pass
// (scan_valid) it folds the absolute maximum of every row into a register;
// clr starts a new token. The scale is then the smallest power of two 2^shift
// with absmax >> shift <= 127. In the quantize pass, q_data is each 32-bit
// value divided by 2^shift, rounded half away from zero and saturated to
// +/-127; shift is the scaling factor handed on to the tensor engine.
// The power-of-two scale is this design's choice: the paper names the
// quantizer and its scale fusion but not its number format.
// Timing: absmax updates at the clock edge; shift and q_data are
// combinational from the current absmax and in_data.
module dyn_quant #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clr,
  input  logic                      scan_valid,
  input  logic [LANES-1:0][DW-1:0]  in_data,
  output logic [LANES-1:0][7:0]     q_data,
  output logic [4:0]                shift
);
  logic [DW-1:0] absmax;
  logic [DW-1:0] row_max;

  function automatic logic [DW-1:0] absval(input logic [DW-1:0] v);
    return v[DW-1] ? (~v + 1'b1) : v;
  endfunction

  always_comb begin
    row_max = '0;
    for (int l = 0; l < LANES; l++)
      if (absval(in_data[l]) > row_max) row_max = absval(in_data[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            absmax <= '0;
    else if (clr)          absmax <= '0;
    else if (scan_valid && row_max > absmax) absmax <= row_max;
  end

  always_comb begin
    shift = '0;
    for (int s = DW-2; s >= 0; s--)
      if ((absmax >> s) > 127) begin
        shift = 5'(s + 1);
        break;
      end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [DW-1:0] a, r;
      a = absval(in_data[l]);
      if (shift == 0) r = a;
      else            r = (a + (DW'(1) << (shift - 1))) >> shift;
      if (r > 127) r = 127;
      q_data[l] = in_data[l][DW-1] ? 8'(-r) : 8'(r);
    end
  end
endmodule
