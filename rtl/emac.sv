// External memory access controller (EMAC).
// A row DMA between the external DRAM and the on-chip buffers. A command
// moves nrows buffer rows of ROW_W bits: dir = 0 loads from DRAM (weights or
// KV cache) into the buffer, dir = 1 stores buffer rows (KV cache) to DRAM.
// Each row is BEATS = ROW_W/DRAM_W DRAM beats at consecutive DRAM word
// addresses. DRAM port: req/we/addr/wdata accepted when ready; read data
// returns in order on rvalid/rdata, at any latency. Buffer port: req/we/addr/
// wdata held until gnt (the buffer arbiter may stall the EMAC); read data is
// valid the cycle after the grant. The paper only names this controller; the
// DRAM bus width, the command fields and the row-by-row order are this
// design's choices.
module emac #(
  parameter int unsigned ROW_W  = 2048,
  parameter int unsigned DRAM_W = 64,
  parameter int unsigned BAW    = 13      // buffer row address (bank + row)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 dir,
  input  logic [31:0]          dram_base,
  input  logic [BAW-1:0]       buf_base,
  input  logic [BAW:0]         nrows,
  output logic                 busy,
  output logic                 done,
  output logic                 dram_req,
  output logic                 dram_we,
  output logic [31:0]          dram_addr,
  output logic [DRAM_W-1:0]    dram_wdata,
  input  logic                 dram_ready,
  input  logic                 dram_rvalid,
  input  logic [DRAM_W-1:0]    dram_rdata,
  output logic                 buf_req,
  output logic                 buf_we,
  output logic [BAW-1:0]       buf_addr,
  output logic [ROW_W-1:0]     buf_wdata,
  input  logic                 buf_gnt,
  input  logic [ROW_W-1:0]     buf_rdata
);
  localparam int unsigned BEATS = ROW_W / DRAM_W;
  localparam int unsigned BTW   = $clog2(BEATS) + 1;

  typedef enum logic [2:0] {E_IDLE, E_LREQ, E_LWR, E_SRD, E_SCAP, E_SWR} estate_e;
  estate_e state;

  logic [31:0]       daddr;
  logic [BAW-1:0]    baddr;
  logic [BAW:0]      left;
  logic [BTW-1:0]    issued, got;
  logic [ROW_W-1:0]  row;

  assign busy       = (state != E_IDLE);
  assign dram_req   = (state == E_LREQ && issued != BTW'(BEATS)) || (state == E_SWR);
  assign dram_we    = (state == E_SWR);
  assign dram_addr  = daddr;
  assign dram_wdata = row[DRAM_W-1:0];
  assign buf_req    = (state == E_LWR) || (state == E_SRD);
  assign buf_we     = (state == E_LWR);
  assign buf_addr   = baddr;
  assign buf_wdata  = row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; done <= 1'b0; daddr <= '0; baddr <= '0;
      left <= '0; issued <= '0; got <= '0; row <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        E_IDLE: if (start) begin
          daddr <= dram_base; baddr <= buf_base; left <= nrows;
          issued <= '0; got <= '0;
          if (nrows == 0) done <= 1'b1;
          else state <= dir ? E_SRD : E_LREQ;
        end
        E_LREQ: begin
          if (dram_req && dram_ready) begin issued <= issued + 1'b1; daddr <= daddr + 1; end
          if (dram_rvalid) begin
            row <= {dram_rdata, row[ROW_W-1:DRAM_W]};
            got <= got + 1'b1;
            if (got + 1'b1 == BTW'(BEATS)) state <= E_LWR;
          end
        end
        E_LWR: if (buf_gnt) begin
          baddr <= baddr + 1'b1; left <= left - 1'b1; issued <= '0; got <= '0;
          if (left == 1) begin state <= E_IDLE; done <= 1'b1; end
          else state <= E_LREQ;
        end
        E_SRD:  if (buf_gnt) state <= E_SCAP;
        E_SCAP: begin row <= buf_rdata; issued <= '0; state <= E_SWR; end
        E_SWR: if (dram_ready) begin
          row <= row >> DRAM_W; daddr <= daddr + 1; issued <= issued + 1'b1;
          if (issued + 1'b1 == BTW'(BEATS)) begin
            baddr <= baddr + 1'b1; left <= left - 1'b1;
            if (left == 1) begin state <= E_IDLE; done <= 1'b1; end
            else state <= E_SRD;
          end
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
