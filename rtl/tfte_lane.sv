// One lane of the tile-fused tensor engine: a tile fusion unit, its own
// small controller and a 32x16 MAC cluster. On start it fuses the NBLK
// activation tiles of a global-token-buffer row by codebook index, then
// for each codebook entry that is used reads the entry's 32x16 INT4 block
// from its weight-buffer bank (row cb_base + e, data one cycle later) and
// multiplies the fused tile with it. Unused entries cost no cycle, so a row
// whose 8 blocks map to u distinct entries takes u read-multiply steps.
// Finally the 16 sums are shifted right by out_shift, saturated to INT8
// and optionally passed through ReLU (act_relu). Lanes run independently,
// each with its own indices. Latency: 2 + 2u + 1 cycles from start to done.
module tfte_lane #(
  parameter int unsigned NBLK = 8,
  parameter int unsigned NENT = 4,
  parameter int unsigned TW   = 32,
  parameter int unsigned COLS = 16,
  parameter int unsigned WAW  = 8
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                start,
  input  logic [NBLK-1:0][$clog2(NENT)-1:0]   idx,
  input  logic [NBLK-1:0][TW-1:0][7:0]        tiles,
  input  logic [3:0]                          fuse_shift,
  input  logic [4:0]                          out_shift,
  input  logic                                act_relu,
  input  logic [WAW-1:0]                      cb_base,
  output logic                                wb_en,
  output logic [WAW-1:0]                      wb_addr,
  input  logic [TW-1:0][COLS-1:0][3:0]        wb_rdata,
  output logic                                done,
  output logic [COLS-1:0][7:0]                out,
  output logic [2:0]                          nfetch
);
  typedef enum logic [2:0] {L_IDLE, L_FUSE, L_SEL, L_RD, L_MAC, L_OUT} lstate_e;
  lstate_e state;

  logic                           f_valid;
  logic [NENT-1:0][TW-1:0][7:0]   fused;
  logic [NENT-1:0]                used;
  logic [$clog2(NENT):0]          e;
  logic                           mclr, mvalid;
  logic [COLS-1:0][31:0]          psum;

  tfu #(.NBLK(NBLK), .NENT(NENT), .TW(TW)) u_tfu (
    .clk, .rst_n, .valid(start && state == L_IDLE), .idx, .tiles, .fuse_shift,
    .out_valid(f_valid), .fused, .used);

  mac_cluster #(.ROWS(TW), .COLS(COLS)) u_cl (
    .clk, .rst_n, .clr(mclr), .valid(mvalid), .a(fused[e[$clog2(NENT)-1:0]]), .w(wb_rdata), .psum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE; e <= '0; done <= 1'b0; out <= '0; nfetch <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        L_IDLE: if (start) begin state <= L_FUSE; nfetch <= '0; end
        L_FUSE: if (f_valid) begin e <= '0; state <= L_SEL; end
        L_SEL: begin
          if (e == ($clog2(NENT)+1)'(NENT)) state <= L_OUT;
          else if (used[e[$clog2(NENT)-1:0]]) state <= L_RD;
          else e <= e + 1'b1;
        end
        L_RD:  state <= L_MAC;
        L_MAC: begin nfetch <= nfetch + 1'b1; e <= e + 1'b1; state <= L_SEL; end
        L_OUT: begin
          for (int c = 0; c < COLS; c++) begin
            logic signed [31:0] v;
            v = $signed(psum[c]) >>> out_shift;
            if (act_relu && v < 0) v = 0;
            if (v > 127)       out[c] <= 8'd127;
            else if (v < -128) out[c] <= 8'h80;
            else               out[c] <= v[7:0];
          end
          done  <= 1'b1;
          state <= L_IDLE;
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  assign mclr    = (state == L_FUSE);
  assign mvalid  = (state == L_MAC);
  assign wb_en   = (state == L_RD);
  assign wb_addr = cb_base + WAW'(e);
endmodule
