// Testbench of the token allocator (the LRU sequencer), wired here by hand
// to the buffer, FWHT array, Hadamard accumulator and quantizer so that the
// sequencer's own ports are exercised. Same reference as the LRU test:
// Loads a random token and a random +/-1 npt Hadamard matrix (stored as
// columns) into the local token buffer, runs the two-stage rotation and
// compares every INT8 output and the scale exponent against a reference
// computed here from the definitions: the Walsh-Hadamard transform from
// its (-1)^popcount(i&j) entries, the H_m product as a plain sum, the Q1.15
// scale and the power-of-two quantizer. Also checks the rotation latency
// against the sequencer's cycle budget. Three configurations are run.
module tb_tau;
  localparam int LANES = 64, DW = 32, DEPTH = 512, AW = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_en = 0, host_we = 0;
  logic [AW-1:0] host_addr = '0;
  logic [LANES-1:0][DW-1:0] host_wdata = '0, host_rdata;
  logic start = 0;
  logic [2:0] cfg_k = 0; logic [5:0] cfg_m = 0;
  logic [AW-1:0] cfg_rows = 0, cfg_hbase = 0, cfg_sbase = 0;
  logic [15:0] cfg_scale = 0;
  logic busy, done, q_valid; logic [AW-1:0] q_row;
  logic [LANES-1:0][7:0] q_data; logic [4:0] q_shift;

  logic t_en, t_we, rfa_valid, rfa_ov, hau_clr, hau_acc, dq_clr, dq_scan;
  logic [AW-1:0] t_addr;
  logic [LANES-1:0][DW-1:0] t_wdata, rdata, rfa_in, rfa_out, hau_data, hau_out, dq_in;
  logic [2:0] rfa_k; logic [3:0] hb, hm; logic [1:0] hrow;
  assign host_rdata = rdata;
  sram_sp #(.DEPTH(DEPTH), .WIDTH(LANES*DW)) u_ltb (.clk, .en(busy ? t_en : host_en),
    .we(busy ? t_we : host_we), .addr(busy ? t_addr : host_addr),
    .wdata(busy ? t_wdata : host_wdata), .rdata(rdata));
  tau dut (.clk, .rst_n, .start, .cfg_k, .cfg_m, .cfg_rows, .cfg_hbase, .cfg_sbase, .busy, .done,
    .ltb_en(t_en), .ltb_we(t_we), .ltb_addr(t_addr), .ltb_wdata(t_wdata), .ltb_rdata(rdata),
    .rfa_k, .rfa_valid, .rfa_in, .rfa_out, .hau_clr, .hau_acc, .hau_hbits(hb), .hau_mask(hm),
    .hau_data, .hau_row(hrow), .hau_out, .dq_clr, .dq_scan, .dq_in, .q_valid, .q_row);
  rfa u_rfa (.clk, .rst_n, .mode_k(rfa_k), .in_valid(rfa_valid), .in_data(rfa_in), .out_valid(rfa_ov), .out_data(rfa_out));
  hau u_hau (.clk, .rst_n, .clr(hau_clr), .acc_valid(hau_acc), .h_bits(hb), .h_mask(hm), .data(hau_data),
    .scale_q15(cfg_scale), .psum_row(hrow), .out_data(hau_out));
  dyn_quant u_dq (.clk, .rst_n, .clr(dq_clr), .scan_valid(dq_scan), .in_data(dq_in), .q_data, .shift(q_shift));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int signed x   [64][64];   // token rows
  bit        h   [32][32];   // H_m
  int signed ref_q [64][64];
  int ref_shift;

  function automatic int signed q15(longint signed v, int s);
    longint signed pr = v * s + (1 << 14);
    return int'(pr >>> 15);
  endfunction

  task automatic reference(int k, int m, int rows, int scale);
    int signed y[64][64]; int signed z[32][64];
    int n2 = 1 << k; int base; longint unsigned amax; int sh;
    for (int st = 0; st < 2; st++) begin
      base = (st == 0) ? 0 : rows - m;
      for (int r = 0; r < m; r++)
        for (int l = 0; l < 64; l++) begin
          int g = l & ~(n2 - 1); int signed acc = 0;
          for (int jj = 0; jj < n2; jj++)
            acc += ($countones((l & (n2-1)) & jj) % 2) ? -x[base+r][g+jj] : x[base+r][g+jj];
          y[r][l] = acc;
        end
      for (int r = 0; r < m; r++)
        for (int l = 0; l < 64; l++) begin
          longint signed acc = 0;
          for (int jj = 0; jj < m; jj++) acc += h[r][jj] ? y[jj][l] : -y[jj][l];
          z[r][l] = q15(longint'(int'(acc)), scale);
        end
      for (int r = 0; r < m; r++) for (int l = 0; l < 64; l++) x[base+r][l] = z[r][l];
    end
    amax = 0;
    for (int r = 0; r < rows; r++) for (int l = 0; l < 64; l++) begin
      longint unsigned a = (x[r][l] < 0) ? longint'(-x[r][l]) : longint'(x[r][l]);
      if (a > amax) amax = a;
    end
    sh = 0; while ((amax >> sh) > 127) sh++;
    ref_shift = sh;
    for (int r = 0; r < rows; r++) for (int l = 0; l < 64; l++) begin
      longint signed a = (x[r][l] < 0) ? -longint'(x[r][l]) : longint'(x[r][l]);
      longint signed qv = (sh == 0) ? a : ((a + (longint'(1) << (sh-1))) >> sh);
      if (qv > 127) qv = 127;
      ref_q[r][l] = (x[r][l] < 0) ? -int'(qv) : int'(qv);
    end
  endtask

  task automatic run(int k, int m, int rows);
    int n2 = 1 << k; int t0, cyc, budget; int nout = 0;
    int scale = int'(32768.0 / $sqrt(real'(n2 * m)));
    for (int r = 0; r < rows; r++) for (int l = 0; l < 64; l++)
      x[r][l] = (l < n2) ? (int'($urandom_range(0, 4000)) - 2000) : 0;
    for (int r = 0; r < m; r++) for (int c = 0; c < m; c++) h[r][c] = 1'($urandom);
    // write token rows
    for (int r = 0; r < rows; r++) begin
      @(negedge clk); host_en = 1; host_we = 1; host_addr = AW'(r);
      for (int l = 0; l < 64; l++) host_wdata[l] = x[r][l];
    end
    // write H_m columns at hbase = 200
    for (int c = 0; c < m; c++) begin
      @(negedge clk); host_en = 1; host_we = 1; host_addr = AW'(200 + c); host_wdata = '0;
      for (int r = 0; r < m; r++) host_wdata[0][r] = h[r][c];
    end
    @(negedge clk); host_en = 0; host_we = 0;
    reference(k, m, rows, scale);
    cfg_k = 3'(k); cfg_m = 6'(m); cfg_rows = AW'(rows); cfg_hbase = 200; cfg_sbase = 300;
    cfg_scale = 16'(scale); start = 1;
    t0 = $time / 10;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (q_valid) begin
        nout++;
        for (int l = 0; l < 64; l++) begin
          checks++;
          if ($signed(q_data[l]) != ref_q[q_row][l]) begin
            failures++;
            if (failures < 10) $display("mismatch k=%0d row %0d lane %0d: %0d vs %0d", k, q_row, l, $signed(q_data[l]), ref_q[q_row][l]);
          end
        end
        checks++; if (int'(q_shift) != ref_shift) failures++;
      end
    end
    cyc = $time / 10 - t0;
    // sequencer budget: per stage 3m (FWHT) + ceil(m/4)*(1+3m) + m (tile writes) + 2m (copy), then 4R
    budget = 2 * (3*m + ((m+3)/4)*(1+3*m) + m + 2*m) + 4*rows + 2;
    checks++; if (cyc > budget) begin failures++; $display("latency %0d > %0d", cyc, budget); end
    checks++; if (nout != rows) failures++;
    $display("k=%0d m=%0d rows=%0d: %0d cycles, shift %0d", k, m, rows, cyc, ref_shift);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(3, 6, 10);
    run(6, 12, 20);
    run(2, 7, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
