// Non-linear processing unit (NLPU): normalization unit and softmax unit.
// Works on one row of N signed 32-bit fixed-point values with F = 8
// fraction bits (Q23.8).
//  * RMS normalization (softmax = 0): rms = floor(sqrt(sum(x^2) / N)) in
//    raw units, computed by a 32-step restoring square root; then
//    y_i = round-to-zero(x_i * 2^F / rms), i.e. x_i / rms in Q23.8
//    (y = 0 when rms = 0). No learned gain is applied.
//  * Softmax (softmax = 1): with m = max x, d_i = m - x_i, the exponent
//    t_i = d_i * 369 / 256 (369/256 ~ log2 e) gives 2^-t_i, approximated by
//    e_i = (65536 - 128 * frac(t_i)) >> int(t_i) (0 once int(t_i) >= 17),
//    a piecewise-linear 2^-f; then y_i = floor(e_i * 65535 / sum e) as an
//    unsigned Q0.16 probability.
// The paper only names the two units; both number formats and the
// base-2 approximation are this design's choices. One divider is shared
// by all lanes, one lane per cycle, so a row takes about N + 35 cycles.
// Interface: start with in_row and mode; done pulses with out_row valid.
module nlpu #(
  parameter int unsigned N = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    softmax,
  input  logic [N-1:0][31:0]      in_row,
  output logic                    busy,
  output logic                    done,
  output logic [N-1:0][31:0]      out_row
);
  typedef enum logic [2:0] {N_IDLE, N_RED, N_SQRT, N_EXP, N_DIV} nstate_e;
  nstate_e state;

  logic                  mode_q;
  logic [N-1:0][31:0]    x;
  logic [N-1:0][16:0]    e;
  logic [63:0]           rad;
  logic [31:0]           root;
  logic [63:0]           rem;
  logic [5:0]            it;
  logic [$clog2(N):0]    lane;
  logic [31:0]           denom;
  logic signed [31:0]    xmax;

  // combinational reductions over the held row
  logic [71:0]        sumsq_c;
  logic signed [31:0] max_c;
  logic [31:0]        esum_c;
  logic [N-1:0][16:0] e_c;
  always_comb begin
    sumsq_c = '0;
    max_c   = $signed(x[0]);
    for (int i = 0; i < N; i++) begin
      sumsq_c = sumsq_c + 72'($signed(x[i]) * $signed(x[i]));
      if ($signed(x[i]) > max_c) max_c = $signed(x[i]);
    end
    esum_c = '0;
    for (int i = 0; i < N; i++) begin
      logic [63:0] d, t;
      d = 64'(xmax - $signed(x[i]));
      t = (d * 369) >> 8;
      if (t[63:8] >= 17) e_c[i] = '0;
      else e_c[i] = 17'((32'd65536 - 32'(t[7:0]) * 32'd128) >> t[12:8]);
      esum_c = esum_c + 32'(e_c[i]);
    end
  end

  // restoring square root step: two radicand bits per iteration
  logic [63:0] rem_n, trial;
  always_comb begin
    rem_n = {rem[61:0], rad[63:62]};
    trial = {30'd0, root, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= N_IDLE; mode_q <= 1'b0; x <= '0; e <= '0; rad <= '0;
      root <= '0; rem <= '0; it <= '0; lane <= '0; denom <= '0; xmax <= '0;
      done <= 1'b0; out_row <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        N_IDLE: if (start) begin x <= in_row; mode_q <= softmax; state <= N_RED; end
        N_RED: begin
          xmax <= max_c;
          rad   <= 64'(sumsq_c / 72'(N));
          root  <= '0; rem <= '0; it <= '0; lane <= '0;
          state <= mode_q ? N_EXP : N_SQRT;
        end
        N_SQRT: begin
          rad <= rad << 2;
          if (rem_n >= trial) begin
            rem  <= rem_n - trial;
            root <= {root[30:0], 1'b1};
          end else begin
            rem  <= rem_n;
            root <= {root[30:0], 1'b0};
          end
          it <= it + 1'b1;
          if (it == 6'd31) state <= N_DIV;
        end
        N_EXP: begin e <= e_c; denom <= esum_c; state <= N_DIV; end
        N_DIV: begin
          if (mode_q) begin
            out_row[lane[$clog2(N)-1:0]] <= 32'((64'(e[lane[$clog2(N)-1:0]]) * 64'd65535) / 64'(denom));
          end else begin
            logic signed [63:0] num;
            num = 64'($signed(x[lane[$clog2(N)-1:0]])) <<< 8;
            out_row[lane[$clog2(N)-1:0]] <= (root == 0) ? 32'd0 : 32'(num / $signed({32'd0, root}));
          end
          lane <= lane + 1'b1;
          if (lane == ($clog2(N)+1)'(N - 1)) begin state <= N_IDLE; done <= 1'b1; end
        end
        default: state <= N_IDLE;
      endcase
    end
  end

  assign busy = (state != N_IDLE);
endmodule
