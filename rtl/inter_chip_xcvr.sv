// Inter-chip transceiver: the 32-bit link between the four chips of a
// multi-chip system (tokens, partial results and draft/verify traffic).
// A command sends (dir = 1) or receives (dir = 0) nrows global-token-buffer
// rows of ROW_W bits, each as BEATS = ROW_W/32 link words, lowest word
// first. TX: tx_valid/tx_data with tx_ready from the peer. RX: rx_valid/
// rx_data, always accepted; a row is written to the buffer when complete.
// Buffer port as in the EMAC: held until gnt, read data one cycle after it.
// The 32-bit width is the paper's (32b at 150 MHz); the link here runs on
// the core clock with a valid/ready handshake, and the framing is this
// design's choice.
module inter_chip_xcvr #(
  parameter int unsigned ROW_W  = 2048,
  parameter int unsigned LINK_W = 32,
  parameter int unsigned BAW    = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 dir,
  input  logic [BAW-1:0]       buf_base,
  input  logic [BAW:0]         nrows,
  output logic                 busy,
  output logic                 done,
  output logic                 tx_valid,
  output logic [LINK_W-1:0]    tx_data,
  input  logic                 tx_ready,
  input  logic                 rx_valid,
  input  logic [LINK_W-1:0]    rx_data,
  output logic                 buf_req,
  output logic                 buf_we,
  output logic [BAW-1:0]       buf_addr,
  output logic [ROW_W-1:0]     buf_wdata,
  input  logic                 buf_gnt,
  input  logic [ROW_W-1:0]     buf_rdata
);
  localparam int unsigned BEATS = ROW_W / LINK_W;
  localparam int unsigned BTW   = $clog2(BEATS) + 1;

  typedef enum logic [2:0] {X_IDLE, X_RX, X_RXWR, X_TXRD, X_TXCAP, X_TX} xstate_e;
  xstate_e state;

  logic [BAW-1:0]    baddr;
  logic [BAW:0]      left;
  logic [BTW-1:0]    cnt;
  logic [ROW_W-1:0]  row;

  assign busy      = (state != X_IDLE);
  assign tx_valid  = (state == X_TX);
  assign tx_data   = row[LINK_W-1:0];
  assign buf_req   = (state == X_RXWR) || (state == X_TXRD);
  assign buf_we    = (state == X_RXWR);
  assign buf_addr  = baddr;
  assign buf_wdata = row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= X_IDLE; done <= 1'b0; baddr <= '0; left <= '0; cnt <= '0; row <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        X_IDLE: if (start) begin
          baddr <= buf_base; left <= nrows; cnt <= '0;
          if (nrows == 0) done <= 1'b1;
          else state <= dir ? X_TXRD : X_RX;
        end
        X_RX: if (rx_valid) begin
          row <= {rx_data, row[ROW_W-1:LINK_W]};
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == BTW'(BEATS)) state <= X_RXWR;
        end
        X_RXWR: if (buf_gnt) begin
          baddr <= baddr + 1'b1; left <= left - 1'b1; cnt <= '0;
          if (left == 1) begin state <= X_IDLE; done <= 1'b1; end
          else state <= X_RX;
        end
        X_TXRD:  if (buf_gnt) state <= X_TXCAP;
        X_TXCAP: begin row <= buf_rdata; cnt <= '0; state <= X_TX; end
        X_TX: if (tx_ready) begin
          row <= row >> LINK_W; cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == BTW'(BEATS)) begin
            baddr <= baddr + 1'b1; left <= left - 1'b1;
            if (left == 1) begin state <= X_IDLE; done <= 1'b1; end
            else state <= X_TXRD;
          end
        end
        default: state <= X_IDLE;
      endcase
    end
  end
endmodule
