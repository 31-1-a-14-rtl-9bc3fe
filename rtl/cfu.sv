// Codebook fetcher unit (CFU).
// Executes a ReRAM-load instruction: load n_rows codebook rows of one DLM
// layer, starting at ReRAM row rr_base, into weight-buffer bank wb_bank from
// row wb_base on. The codebook selector issues one read per ReRAM row to
// all dies at once (codebooks are mapped vertically, one slice per die, so a
// row read on every die yields one full weight-buffer row); the bank address
// controller pushes the matching bank/row pair to the load interface's
// address FIFO. A read is issued only when the ReRAM controllers are ready
// and the address FIFO has room. done pulses when the last row was issued.
// The paper gives this unit's parts and role; the instruction fields and
// the one-request-per-row handshake are this design's choices.
module cfu #(
  parameter int unsigned RAW    = 15,   // ReRAM row address (2MB / 64B per die row)
  parameter int unsigned NBANKS = 16,
  parameter int unsigned WAW    = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [RAW-1:0]             rr_base,
  input  logic [$clog2(NBANKS)-1:0]  wb_bank_i,
  input  logic [WAW-1:0]             wb_base,
  input  logic [WAW:0]               n_rows,
  output logic                       busy,
  output logic                       done,
  output logic                       rr_req,
  output logic [RAW-1:0]             rr_addr,
  input  logic                       rr_ready,
  output logic                       addr_valid,
  output logic [$clog2(NBANKS)-1:0]  addr_bank,
  output logic [WAW-1:0]             addr_row,
  input  logic                       addr_ready
);
  logic [WAW:0]   cnt, n_q;
  logic [RAW-1:0] rr_q;
  logic [WAW-1:0] wb_q;
  logic [$clog2(NBANKS)-1:0] bank_q;
  logic fire;

  assign fire       = busy && rr_ready && addr_ready;
  assign rr_req     = fire;
  assign rr_addr    = rr_q + RAW'(cnt);
  assign addr_valid = fire;
  assign addr_bank  = bank_q;
  assign addr_row   = wb_q + WAW'(cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0; n_q <= '0; rr_q <= '0; wb_q <= '0; bank_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start && n_rows != 0) begin
        busy <= 1'b1; cnt <= '0; n_q <= n_rows; rr_q <= rr_base; wb_q <= wb_base; bank_q <= wb_bank_i;
      end else if (!busy && start) begin
        done <= 1'b1;
      end else if (fire) begin
        cnt <= cnt + 1'b1;
        if (cnt + 1'b1 == n_q) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end
endmodule
