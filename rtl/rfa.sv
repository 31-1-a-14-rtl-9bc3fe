// Reconfigurable FWHT array (RFA).
// Applies an unnormalised Walsh-Hadamard transform of size 2^k, k = 1..6, to
// every aligned group of 2^k lanes of a 64-lane row of 32-bit features.
// It is built as six radix-2 butterfly stages; stage s pairs lanes i and
// i + 2^s and is bypassed when s >= k, so one array serves all six sizes.
// The paper builds the same function from merged 4-input PEs and a router
// network; the plain butterfly form here is this design's simplification.
// Interface: in_valid/in_data/mode_k in, out_valid/out_data one cycle later.
// Adders are 32 bits wide and wrap on overflow, as in the paper's 32b adders.
module rfa #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [2:0]              mode_k,
  input  logic                    in_valid,
  input  logic [LANES-1:0][DW-1:0] in_data,
  output logic                    out_valid,
  output logic [LANES-1:0][DW-1:0] out_data
);
  localparam int unsigned STAGES = $clog2(LANES);

  logic [LANES-1:0][DW-1:0] st [STAGES+1];

  always_comb begin
    st[0] = in_data;
    for (int s = 0; s < STAGES; s++) begin
      for (int i = 0; i < LANES; i++) begin
        if (32'(s) < 32'(mode_k)) begin
          if (((i >> s) & 1) == 0) st[s+1][i] = st[s][i] + st[s][i + (1 << s)];
          else                     st[s+1][i] = st[s][i - (1 << s)] - st[s][i];
        end else begin
          st[s+1][i] = st[s][i];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= st[STAGES];
    end
  end
endmodule
