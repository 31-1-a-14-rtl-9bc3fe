// Local rotation unit (LRU).
// Removes activation outliers of a target-model token before low-bit
// quantization by rotating it with two overlapping local Hadamard rotations
// (H_m (x) H_2^k over the upper rows, then over the lower rows) instead of
// one deep global FWHT, then quantizes it to INT8 with a dynamic scale.
// Holds the 128KB local token buffer (512 rows x 64 x 32b), the token
// allocator (tau), the reconfigurable FWHT array (rfa), the Hadamard
// accumulator (hau) and the dynamic quantizer (dyn_quant).
// Interface: while idle the host port reads and writes LTB rows (read data one
// cycle later); start with the configuration launches a rotation; the INT8
// rows then stream out on q_valid/q_row/q_data with q_shift, ending with done.
module lru #(
  parameter int unsigned LANES = 64,
  parameter int unsigned DW    = 32,
  parameter int unsigned DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        host_en,
  input  logic                        host_we,
  input  logic [$clog2(DEPTH)-1:0]    host_addr,
  input  logic [LANES-1:0][DW-1:0]    host_wdata,
  output logic [LANES-1:0][DW-1:0]    host_rdata,
  input  logic                        start,
  input  logic [2:0]                  cfg_k,
  input  logic [5:0]                  cfg_m,
  input  logic [$clog2(DEPTH)-1:0]    cfg_rows,
  input  logic [$clog2(DEPTH)-1:0]    cfg_hbase,
  input  logic [$clog2(DEPTH)-1:0]    cfg_sbase,
  input  logic [15:0]                 cfg_scale_q15,
  output logic                        busy,
  output logic                        done,
  output logic                        q_valid,
  output logic [$clog2(DEPTH)-1:0]    q_row,
  output logic [LANES-1:0][7:0]       q_data,
  output logic [4:0]                  q_shift
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic                      t_en, t_we;
  logic [AW-1:0]             t_addr;
  logic [LANES-1:0][DW-1:0]  t_wdata, rdata;
  logic [2:0]                rfa_k;
  logic                      rfa_valid, rfa_ovalid;
  logic [LANES-1:0][DW-1:0]  rfa_in, rfa_out;
  logic                      hau_clr, hau_acc;
  logic [3:0]                hau_hbits, hau_mask;
  logic [LANES-1:0][DW-1:0]  hau_data, hau_out, dq_in;
  logic [1:0]                hau_row;
  logic                      dq_clr, dq_scan;

  sram_sp #(.DEPTH(DEPTH), .WIDTH(LANES*DW)) u_ltb (
    .clk, .en(busy ? t_en : host_en), .we(busy ? t_we : host_we),
    .addr(busy ? t_addr : host_addr), .wdata(busy ? t_wdata : host_wdata), .rdata(rdata));
  assign host_rdata = rdata;

  tau #(.LANES(LANES), .DW(DW), .AW(AW), .PES(4)) u_tau (
    .clk, .rst_n, .start, .cfg_k, .cfg_m, .cfg_rows, .cfg_hbase, .cfg_sbase,
    .busy, .done,
    .ltb_en(t_en), .ltb_we(t_we), .ltb_addr(t_addr), .ltb_wdata(t_wdata), .ltb_rdata(rdata),
    .rfa_k, .rfa_valid, .rfa_in, .rfa_out,
    .hau_clr, .hau_acc, .hau_hbits, .hau_mask, .hau_data, .hau_row, .hau_out,
    .dq_clr, .dq_scan, .dq_in, .q_valid, .q_row);

  rfa #(.LANES(LANES), .DW(DW)) u_rfa (
    .clk, .rst_n, .mode_k(rfa_k), .in_valid(rfa_valid), .in_data(rfa_in),
    .out_valid(rfa_ovalid), .out_data(rfa_out));

  hau #(.LANES(LANES), .DW(DW), .PES(4)) u_hau (
    .clk, .rst_n, .clr(hau_clr), .acc_valid(hau_acc), .h_bits(hau_hbits), .h_mask(hau_mask),
    .data(hau_data), .scale_q15(cfg_scale_q15), .psum_row(hau_row), .out_data(hau_out));

  dyn_quant #(.LANES(LANES), .DW(DW)) u_dq (
    .clk, .rst_n, .clr(dq_clr), .scan_valid(dq_scan), .in_data(dq_in),
    .q_data, .shift(q_shift));
endmodule
