// Token allocator unit (TAU): the sequencer of the local rotation unit.
// A token of n = R * 2^k features sits in the local token buffer (LTB) as R
// rows of 2^k 32-bit features (unused lanes zero). The rotation is done in
// two stages over overlapping windows of m rows: the upper window rows
// 0..m-1, then the lower window rows c..c+m-1 with c = R-m. Each stage:
//   1. FWHT: every window row is read, passed through the RFA and written
//      back in place (3 cycles per row).
//   2. H_m GEMM: for each tile of 4 output rows the HAU is cleared, then for
//      every column j the LTB row hbase+j (column j of H_m, bit r of the row = H_m[r][j],
//      1 = +1, 0 = -1) and window row j are read and accumulated; the 4 scaled
//      sums are written to scratch rows sbase+r. Padding rows past m are
//      masked off.
//   3. Copy-back: scratch rows replace the window rows.
// Then the dynamic quantizer scans all R rows for the abs-max and a second
// pass streams the INT8 rows out (q_valid, q_row, q_data) with the scale
// exponent. The two-stage order, the H_m column storage in the LTB and the
// 4-row HAU tiles follow the paper; the scratch rows, copy-back and the
// two-pass quantization are this design's choices.
// The TAU owns the LTB while busy; the caller muxes its own access in when idle.
module tau #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32,
  parameter int unsigned AW    = 9,
  parameter int unsigned PES   = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [2:0]                cfg_k,
  input  logic [5:0]                cfg_m,
  input  logic [AW-1:0]             cfg_rows,
  input  logic [AW-1:0]             cfg_hbase,
  input  logic [AW-1:0]             cfg_sbase,
  output logic                      busy,
  output logic                      done,
  // LTB port
  output logic                      ltb_en,
  output logic                      ltb_we,
  output logic [AW-1:0]             ltb_addr,
  output logic [LANES-1:0][DW-1:0]  ltb_wdata,
  input  logic [LANES-1:0][DW-1:0]  ltb_rdata,
  // RFA
  output logic [2:0]                rfa_k,
  output logic                      rfa_valid,
  output logic [LANES-1:0][DW-1:0]  rfa_in,
  input  logic [LANES-1:0][DW-1:0]  rfa_out,
  // HAU
  output logic                      hau_clr,
  output logic                      hau_acc,
  output logic [PES-1:0]            hau_hbits,
  output logic [PES-1:0]            hau_mask,
  output logic [LANES-1:0][DW-1:0]  hau_data,
  output logic [$clog2(PES)-1:0]    hau_row,
  input  logic [LANES-1:0][DW-1:0]  hau_out,
  // dynamic quantizer
  output logic                      dq_clr,
  output logic                      dq_scan,
  output logic [LANES-1:0][DW-1:0]  dq_in,
  // rotated, quantized output rows
  output logic                      q_valid,
  output logic [AW-1:0]             q_row
);
  typedef enum logic [3:0] {
    S_IDLE, S_F_RD, S_F_RFA, S_F_WB, S_G_CLR, S_G_HRD, S_G_DRD, S_G_ACC,
    S_G_WR, S_C_RD, S_C_WB, S_Q_SRD, S_Q_SCAN, S_Q_QRD, S_Q_OUT
  } state_e;

  state_e              state;
  logic                stage;
  logic [AW-1:0]       base, j;
  logic [5:0]          tile_r;     // first output row of the current tile
  logic [$clog2(PES)-1:0] p;
  logic [PES-1:0]      hbits_q;
  logic [2:0]          k_q;
  logic [5:0]          m_q;
  logic [AW-1:0]       rows_q, hbase_q, sbase_q;

  wire [AW-1:0] m_aw = AW'(m_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; stage <= 1'b0; base <= '0; j <= '0; tile_r <= '0; p <= '0;
      hbits_q <= '0; k_q <= '0; m_q <= '0; rows_q <= '0; hbase_q <= '0; sbase_q <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          k_q <= cfg_k; m_q <= cfg_m; rows_q <= cfg_rows;
          hbase_q <= cfg_hbase; sbase_q <= cfg_sbase;
          stage <= 1'b0; base <= '0; j <= '0;
          state <= S_F_RD;
        end
        S_F_RD:  state <= S_F_RFA;
        S_F_RFA: state <= S_F_WB;
        S_F_WB: begin
          if (j == m_aw - 1'b1) begin j <= '0; tile_r <= '0; state <= S_G_CLR; end
          else begin j <= j + 1'b1; state <= S_F_RD; end
        end
        S_G_CLR: begin j <= '0; state <= S_G_HRD; end
        S_G_HRD: state <= S_G_DRD;
        S_G_DRD: begin
          hbits_q <= PES'(ltb_rdata >> tile_r);
          state <= S_G_ACC;
        end
        S_G_ACC: begin
          if (j == m_aw - 1'b1) begin p <= '0; state <= S_G_WR; end
          else begin j <= j + 1'b1; state <= S_G_HRD; end
        end
        S_G_WR: begin
          if (p == $clog2(PES)'(PES-1) || tile_r + 6'(p) + 6'd1 >= m_q) begin
            if (tile_r + 6'(PES) >= m_q) begin j <= '0; state <= S_C_RD; end
            else begin tile_r <= tile_r + 6'(PES); state <= S_G_CLR; end
          end else p <= p + 1'b1;
        end
        S_C_RD: state <= S_C_WB;
        S_C_WB: begin
          if (j == m_aw - 1'b1) begin
            j <= '0;
            if (!stage) begin stage <= 1'b1; base <= rows_q - m_aw; state <= S_F_RD; end
            else state <= S_Q_SRD;
          end else begin j <= j + 1'b1; state <= S_C_RD; end
        end
        S_Q_SRD:  state <= S_Q_SCAN;
        S_Q_SCAN: begin
          if (j == rows_q - 1'b1) begin j <= '0; state <= S_Q_QRD; end
          else begin j <= j + 1'b1; state <= S_Q_SRD; end
        end
        S_Q_QRD: state <= S_Q_OUT;
        S_Q_OUT: begin
          if (j == rows_q - 1'b1) begin j <= '0; done <= 1'b1; state <= S_IDLE; end
          else begin j <= j + 1'b1; state <= S_Q_QRD; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    ltb_en    = 1'b0;
    ltb_we    = 1'b0;
    ltb_addr  = '0;
    ltb_wdata = rfa_out;
    rfa_k     = k_q;
    rfa_valid = (state == S_F_RFA);
    rfa_in    = ltb_rdata;
    hau_clr   = (state == S_G_CLR);
    hau_acc   = (state == S_G_ACC);
    hau_hbits = hbits_q;
    hau_data  = ltb_rdata;
    hau_row   = p;
    for (int i = 0; i < PES; i++) hau_mask[i] = (tile_r + 6'(i) < m_q);
    dq_clr    = (state == S_IDLE) && start;
    dq_scan   = (state == S_Q_SCAN);
    dq_in     = ltb_rdata;
    q_valid   = (state == S_Q_OUT);
    q_row     = j;
    unique case (state)
      S_F_RD:  begin ltb_en = 1'b1; ltb_addr = base + j; end
      S_F_WB:  begin ltb_en = 1'b1; ltb_we = 1'b1; ltb_addr = base + j; ltb_wdata = rfa_out; end
      S_G_HRD: begin ltb_en = 1'b1; ltb_addr = hbase_q + j; end
      S_G_DRD: begin ltb_en = 1'b1; ltb_addr = base + j; end
      S_G_WR:  begin ltb_en = 1'b1; ltb_we = 1'b1; ltb_addr = sbase_q + AW'(tile_r) + AW'(p); ltb_wdata = hau_out; end
      S_C_RD:  begin ltb_en = 1'b1; ltb_addr = sbase_q + j; end
      S_C_WB:  begin ltb_en = 1'b1; ltb_we = 1'b1; ltb_addr = base + j; ltb_wdata = ltb_rdata; end
      S_Q_SRD, S_Q_QRD: begin ltb_en = 1'b1; ltb_addr = j; end
      default: ;
    endcase
  end
endmodule
