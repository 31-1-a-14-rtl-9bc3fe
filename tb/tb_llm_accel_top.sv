// End-to-end testbench of the accelerator's logic die at its default size.
// Around the die: four ReRAM die models, a DRAM model, a peer chip on the
// inter-chip link, and draft/target token models. The host writes a program
// into the ISA buffer that
//   * loads activation tiles (EMAC) and draft-model codebooks (ReRAM load)
//     and runs a tile-fused GEMV on all 16 TFTE lanes, checked lane by lane;
//   * sends a result row to the peer chip and receives a row back, stored to
//     DRAM and checked;
//   * loads a token and a +/-1 H_m matrix, rotates and quantizes it in the LRU,
//     stores the INT8 rows to DRAM and checks them against a reference;
//   * runs a softmax row through the NLPU and checks it;
//   * overlaps work so that the scheduler's dependency stalls and
//     out-of-order issue, the fetcher's queue-full stall, buffer-port stalls
//     of the EMAC and of the ReRAM path, and tile-fusion fetch savings occur.
// It then starts adaptive parallel speculative decoding, which launches the
// draft and target programs, and checks the committed token stream and that
// both parallel continuation and fallback happen. Each mechanism is counted;
// one that never happens counts as a failure.
module tb_llm_accel_top;
  import accel_pkg::*;
  localparam int TOKW = 17, MAXDL = 32;
  logic clk = 0, clk2x = 0, rst_n = 1;
  initial #1 rst_n = 0;                    // power-on reset edge before the first clock
  always #4 clk = ~clk;
  always #2.5 clk2x = ~clk2x;
  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- DUT and models ----------------
  logic mcu_isa_we = 0; logic [12:0] mcu_isa_addr = 0; logic [63:0] mcu_isa_wdata = 0;
  logic mcu_csr_we = 0; logic [2:0] mcu_csr_addr = 0; logic [31:0] mcu_csr_wdata = 0;
  logic rr_clk, rr_req; logic [14:0] rr_addr; logic [3:0] rdy, rr_valid; logic [3:0][511:0] rr_data;
  logic dram_req, dram_we, dram_ready, dram_rvalid; logic [31:0] dram_addr; logic [63:0] dram_wdata, dram_rdata;
  logic tx_valid, tx_ready = 1, rx_valid = 0; logic [31:0] tx_data, rx_data = 0;
  logic dlm_done = 0, tlm_done = 0, dlm_req, dlm_spec, tlm_req;
  logic [MAXDL-1:0][TOKW-1:0] dlm_tokens = '0, tlm_drafts;
  logic [MAXDL:0][TOKW-1:0] tlm_tokens = '0, commit_tokens;
  logic [5:0] dlm_len, tlm_len, commit_n;
  logic commit_valid, apsd_done; apsd_mode_e apsd_mode;
  logic [15:0] committed, n_continue, n_revert, n_rejected;
  logic [4:0] lru_shift; logic [3:0] q_idle, rli_overflow;

  llm_accel_top dut (.clk, .rst_n, .clk2x, .rst2x_n(rst_n),
    .mcu_isa_we, .mcu_isa_addr, .mcu_isa_wdata, .mcu_csr_we, .mcu_csr_addr, .mcu_csr_wdata,
    .rr_clk, .rr_req, .rr_addr, .rr_ready(&rdy), .rr_valid, .rr_data,
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_ready, .dram_rvalid, .dram_rdata,
    .tx_valid, .tx_data, .tx_ready, .rx_valid, .rx_data,
    .dlm_done, .dlm_tokens, .tlm_done, .tlm_tokens, .dlm_req, .dlm_len, .dlm_spec,
    .tlm_req, .tlm_len, .tlm_drafts, .commit_valid, .commit_n, .commit_tokens,
    .apsd_mode, .apsd_done, .committed, .n_continue, .n_revert, .n_rejected,
    .lru_shift, .q_idle, .rli_overflow);

  for (genvar d = 0; d < 4; d++) begin : g_die
    reram_die_model #(.DIE(d)) u_die (.clk, .req(rr_req), .addr(rr_addr), .ready(rdy[d]),
      .rr_clk, .valid(rr_valid[d]), .data(rr_data[d]));
  end
  dram_model u_dram (.clk, .rst_n, .req(dram_req), .we(dram_we), .addr(dram_addr), .wdata(dram_wdata),
    .ready(dram_ready), .rvalid(dram_rvalid), .rdata(dram_rdata));

  function automatic logic [511:0] pattern(int d, int unsigned a);
    logic [511:0] r;
    for (int w = 0; w < 16; w++) r[w*32 +: 32] = a * 32'd2654435761 + d * 40503 + w * 97;
    return r;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_dep = 0, n_ooo = 0, n_fetch_full = 0, n_gtb_stall = 0, n_rli_stall = 0;
  int n_tx = 0, n_lru = 0, n_nlpu = 0, n_tfte = 0, fetches_min = 999;
  int seq = 0; int qseq [4][$];
  // sampled mid-cycle, when the combinational handshakes have settled
  always @(negedge clk) if (rst_n) begin
    if (dut.dep_stall != 0) n_dep++;
    if (dut.fetch_stall) n_fetch_full++;
    if ((dut.em_breq && !dut.em_gnt) || (dut.xc_breq && !dut.xc_gnt)) n_gtb_stall++;
    if (!dut.rli_ready && dut.u_rli.f_empty == 0 && !dut.u_rli.a_empty) n_rli_stall++;
    if (dut.l_done) n_lru++;
    if (dut.n_done) n_nlpu++;
    if (dut.t_done) begin n_tfte++; if (int'(dut.t_fetches) < fetches_min) fetches_min = int'(dut.t_fetches); end
    if (tx_valid && tx_ready) n_tx++;
    for (int q = 0; q < 4; q++) if (dut.issue_valid[q]) begin
      automatic int s = qseq[q].pop_front();
      for (int o = 0; o < 4; o++) if (o != q && qseq[o].size() > 0 && qseq[o][0] < s) begin n_ooo++; break; end
    end
    if (dut.push) begin qseq[dut.push_instr.qid].push_back(seq); seq++; end
  end

  // peer chip: records what is sent, sends a row when the receiver waits
  logic [31:0] txw [$];
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) txw.push_back(tx_data);
  logic [31:0] rxw [64];
  initial begin
    for (int w = 0; w < 64; w++) rxw[w] = $urandom;
    wait (rst_n);
    forever begin
      @(negedge clk);
      if (dut.u_xcvr.state == 1) begin
        for (int w = 0; w < 64; w++) begin rx_valid = 1; rx_data = rxw[w]; @(negedge clk); end
        rx_valid = 0;
      end
    end
  end

  // ---------------- program helpers ----------------
  function automatic logic [2:0] marks(int q, logic [3:0] abs);
    logic [2:0] m;
    for (int i = 0; i < 3; i++) m[i] = abs[mark_to_q(2'(q), 2'(i))];
    return m;
  endfunction
  instr_t prog [$];
  function automatic void emit(queue_e q, logic [3:0] par, logic [3:0] dau, logic [PAYLOAD_W-1:0] pl);
    instr_t i;
    i.qid = q; i.par = marks(int'(q), par); i.dau = marks(int'(q), dau); i.payload = pl;
    prog.push_back(i);
  endfunction
  function automatic logic [PAYLOAD_W-1:0] em(bit dir, int dram, bit sel, int bank, int row, int n);
    op_emac_t e; e = '0;
    e.dir = dir; e.dram_base = 24'(dram); e.buf_sel = sel; e.buf_base = {4'(bank), 9'(row)}; e.nrows = 14'(n);
    return e;
  endfunction
  function automatic logic [PAYLOAD_W-1:0] rl(int rr, int bank, int row, int n);
    op_rload_t r; r = '0; r.rr_base = 15'(rr); r.wb_bank = 4'(bank); r.wb_base = 8'(row); r.n_rows = 9'(n);
    return r;
  endfunction
  function automatic logic [PAYLOAD_W-1:0] xc(bit dir, int bank, int row, int n);
    op_xcvr_t x; x = '0; x.dir = dir; x.buf_base = {4'(bank), 9'(row)}; x.nrows = 14'(n);
    return x;
  endfunction

  localparam logic [3:0] QX = 4'b0001, QC = 4'b0010, QR = 4'b0100, QE = 4'b1000, N0 = 4'b0000;

  // rows 1 and 2 of every global-token-buffer bank, for checking GEMV results
  logic [2047:0] gtb_r1 [16], gtb_r2 [16];
  for (genvar b = 0; b < 16; b++) begin : g_peek
    assign gtb_r1[b] = dut.u_gtb.g_bank[b].u_bank.mem[1];
    assign gtb_r2[b] = dut.u_gtb.g_bank[b].u_bank.mem[2];
  end

  // ---------------- reference data ----------------
  int signed tile [16][8][32];
  logic [15:0] tidx;
  int K = 3, M = 6, R = 10;
  int signed x [16][64];
  bit h [8][8];
  int signed ref_q [16][64]; int ref_shift;
  int scale;

  task automatic lru_reference();
    int signed y[8][64]; int signed z[8][64]; longint unsigned amax; int sh; int n2 = 1 << K; int base;
    for (int st = 0; st < 2; st++) begin
      base = (st == 0) ? 0 : R - M;
      for (int r = 0; r < M; r++) for (int l = 0; l < 64; l++) begin
        int g = l & ~(n2 - 1); int signed acc = 0;
        for (int jj = 0; jj < n2; jj++) acc += ($countones((l & (n2-1)) & jj) % 2) ? -x[base+r][g+jj] : x[base+r][g+jj];
        y[r][l] = acc;
      end
      for (int r = 0; r < M; r++) for (int l = 0; l < 64; l++) begin
        longint signed acc = 0;
        for (int jj = 0; jj < M; jj++) acc += h[r][jj] ? y[jj][l] : -y[jj][l];
        z[r][l] = int'((acc * scale + (1 << 14)) >>> 15);
      end
      for (int r = 0; r < M; r++) for (int l = 0; l < 64; l++) x[base+r][l] = z[r][l];
    end
    amax = 0;
    for (int r = 0; r < R; r++) for (int l = 0; l < 64; l++) begin
      longint unsigned a = (x[r][l] < 0) ? longint'(-x[r][l]) : longint'(x[r][l]);
      if (a > amax) amax = a;
    end
    sh = 0; while ((amax >> sh) > 127) sh++;
    ref_shift = sh;
    for (int r = 0; r < R; r++) for (int l = 0; l < 64; l++) begin
      longint signed a = (x[r][l] < 0) ? -longint'(x[r][l]) : longint'(x[r][l]);
      longint signed qv = (sh == 0) ? a : ((a + (longint'(1) << (sh-1))) >> sh);
      if (qv > 127) qv = 127;
      ref_q[r][l] = (x[r][l] < 0) ? -int'(qv) : int'(qv);
    end
  endtask

  function automatic logic [7:0] dram_byte(int unsigned a, int byte_i);
    logic [63:0] w = u_dram.peek(a + byte_i / 8);
    return w[(byte_i % 8) * 8 +: 8];
  endfunction

  // ---------------- APSD token models ----------------
  logic [TOKW-1:0] G [4096];
  int pos = 0;
  always @(posedge clk) if (rst_n && dlm_req) fork
    automatic int base = dlm_spec ? pos + int'(tlm_len) : pos;
    automatic int len = int'(dlm_len);
    begin
      repeat (4 * len) @(posedge clk);
      for (int i = 0; i < MAXDL; i++) dlm_tokens[i] <= (i < len) ? (($urandom_range(0, 99) < 90) ? G[base + i] : ~G[base + i]) : '0;
      dlm_done <= 1; @(posedge clk) dlm_done <= 0;
    end
  join_none
  always @(posedge clk) if (rst_n && tlm_req) fork
    automatic int l = int'(tlm_len);
    automatic logic [MAXDL-1:0][TOKW-1:0] d = tlm_drafts;
    begin
      automatic bit ok = 1;
      repeat (60) @(posedge clk);
      for (int i = 0; i <= MAXDL; i++) begin
        tlm_tokens[i] <= ok ? G[pos + i] : '1;
        if (i < l && d[i] != G[pos + i]) ok = 0;
      end
      tlm_done <= 1; @(posedge clk) tlm_done <= 0;
    end
  join_none
  always @(posedge clk) if (rst_n && commit_valid) begin
    for (int i = 0; i < int'(commit_n); i++) chk(commit_tokens[i] == G[pos + i], "committed token");
    pos += int'(commit_n);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic csr(int a, logic [31:0] v);
    @(negedge clk); mcu_csr_we = 1; mcu_csr_addr = 3'(a); mcu_csr_wdata = v;
    @(negedge clk); mcu_csr_we = 0;
  endtask

  initial begin
    int n_main;
    op_tfte_t t; op_ltb_load_t ld; op_lru_t lr; op_nlpu_t nl;
    // DRAM contents: activation tiles (small INT8), token rows, H_m columns
    for (int b = 0; b < 16; b++) for (int j = 0; j < 8; j++) for (int r = 0; r < 32; r++) tile[b][j][r] = $urandom_range(0, 30) - 15;
    for (int b = 0; b < 16; b++) for (int wd = 0; wd < 32; wd++) begin
      logic [63:0] v;
      for (int k = 0; k < 8; k++) begin
        automatic int e = wd * 8 + k; v[k*8 +: 8] = 8'(tile[b][e / 32][e % 32]);
      end
      u_dram.poke(32'h10000 + b*32 + wd, v);
    end
    for (int r = 0; r < R; r++) for (int l = 0; l < 64; l++) x[r][l] = (l < (1 << K)) ? int'($urandom_range(0, 4000)) - 2000 : 0;
    for (int r = 0; r < R; r++) for (int wd = 0; wd < 32; wd++) u_dram.poke(32'h20000 + r*32 + wd, {32'(x[r][2*wd+1]), 32'(x[r][2*wd])});
    for (int r = 0; r < M; r++) for (int c = 0; c < M; c++) h[r][c] = 1'($urandom);
    for (int c = 0; c < M; c++) begin
      automatic logic [63:0] v = '0;
      for (int r = 0; r < M; r++) v[r] = h[r][c];
      u_dram.poke(32'h21000 + c*32, v);
      for (int wd = 1; wd < 32; wd++) u_dram.poke(32'h21000 + c*32 + wd, '0);
    end
    scale = int'(32768.0 / $sqrt(real'((1 << K) * M)));
    tidx = 16'($urandom);
    for (int i = 0; i < 4096; i++) G[i] = 17'($urandom);

    // ---- program, context 0 ----
    for (int b = 0; b < 16; b++) emit(Q_EMAC, N0, (b == 15) ? (QC | QR) : N0, em(0, 32'h10000 + b*32, 0, b, 0, 1));
    for (int b = 0; b < 16; b++) emit(Q_RLOAD, N0, (b == 15) ? QC : N0, rl(64*b, b, 0, 4));
    t = '0; t.op = OP_TFTE; t.gtb_row = 0; t.cb_base = 0; t.idx = tidx; t.fuse_shift = 0; t.out_shift = 6; t.out_row = 1;
    emit(Q_COMP, QR | QE, QX, t);
    emit(Q_RLOAD, QE, N0, rl(5000, 7, 100, 120));            // long codebook load overlapping the GEMVs
    t.out_row = 2; emit(Q_COMP, N0, N0, t);
    emit(Q_XCVR, QC, N0, xc(1, 0, 1, 1));                    // send TFTE result row
    emit(Q_XCVR, N0, QE, xc(0, 5, 10, 1));                   // receive a row
    emit(Q_EMAC, N0, N0, em(0, 32'h20000, 0, 2, 100, R));    // token rows
    emit(Q_EMAC, N0, QC, em(0, 32'h21000, 0, 2, 200, M));    // H_m columns
    emit(Q_EMAC, N0, N0, em(1, 32'h70000, 0, 2, 100, R));    // copy token rows back while the LTB loads
    emit(Q_EMAC, QX, N0, em(1, 32'h40000, 0, 5, 10, 1));     // store received row
    ld = '0; ld.op = OP_LTB_LOAD; ld.gbank = 2; ld.grow = 100; ld.lrow = 0; ld.n = 10'(R);
    emit(Q_COMP, QE, N0, ld);
    ld.grow = 200; ld.lrow = 200; ld.n = 10'(M); emit(Q_COMP, N0, N0, ld);
    lr = '0; lr.op = OP_LRU; lr.k = 3'(K); lr.m = 6'(M); lr.rows = 9'(R); lr.hbase = 200; lr.sbase = 300; lr.scale_q15 = 16'(scale);
    emit(Q_COMP, N0, QE, lr);
    nl = '0; nl.op = OP_NLPU; nl.softmax = 1; nl.gbank = 2; nl.src_row = 100; nl.dst_row = 400;
    emit(Q_COMP, N0, QE, nl);
    emit(Q_EMAC, QC, N0, em(1, 32'h50000, 0, 3, 50, R));     // LRU output rows
    emit(Q_EMAC, QC, N0, em(1, 32'h60000, 0, 2, 400, 1));    // softmax row
    n_main = prog.size();
    // APSD programs: context 0 (draft) and context 1 (target)
    while (prog.size() < 100) emit(Q_COMP, N0, N0, '0);
    emit(Q_RLOAD, N0, N0, rl(0, 8, 0, 2));
    while (prog.size() < 110) emit(Q_COMP, N0, N0, '0);
    emit(Q_EMAC, N0, N0, em(0, 32'h30000, 0, 9, 0, 1));

    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk); mcu_isa_we = 1; mcu_isa_addr = 13'(i); mcu_isa_wdata = prog[i];
    end
    @(negedge clk); mcu_isa_we = 0;
    csr(3, {19'd0, 9'd50, 4'd3});                          // LRU output: bank 3 row 50
    csr(0, {2'b0, 14'(n_main), 3'b0, 13'd0});              // context 0: whole program
    lru_reference();
    csr(4, 32'h2);                                          // launch context 0
    repeat (10) @(negedge clk);
    while (!(q_idle == 4'hf && !dut.ctx_busy[0] && !dut.u_tc.pend)) @(negedge clk);
    repeat (10) @(negedge clk);

    // ---- checks of the program's results ----
    for (int b = 0; b < 16; b++) for (int c = 0; c < 16; c++) begin
      automatic int s = 0;
      for (int j = 0; j < 8; j++) begin
        automatic int e = int'(tidx[j*2 +: 2]);
        automatic logic [2047:0] wrow;
        for (int d = 0; d < 4; d++) wrow[d*512 +: 512] = pattern(d, 64*b + e);
        for (int r = 0; r < 32; r++) s += tile[b][j][r] * $signed(wrow[(r*16 + c)*4 +: 4]);
      end
      s = s >>> 6; if (s > 127) s = 127; if (s < -128) s = -128;
      chk($signed(gtb_r1[b][c*8 +: 8]) == s, "TFTE output");
      chk($signed(gtb_r2[b][c*8 +: 8]) == s, "second TFTE output");
    end
    chk(txw.size() == 64, "link words sent");
    for (int w = 0; w < 64 && w < txw.size(); w++)
      chk(txw[w] == gtb_r1[0][w*32 +: 32], "link word");
    for (int w = 0; w < 64; w++) begin
      automatic logic [63:0] v = u_dram.peek(32'h40000 + w / 2);
      chk(v[(w % 2) * 32 +: 32] == rxw[w], "received row stored to DRAM");
    end
    for (int r = 0; r < R; r++) for (int wd = 0; wd < 32; wd++)
      chk(u_dram.peek(32'h70000 + r*32 + wd) == u_dram.peek(32'h20000 + r*32 + wd), "token row copy");
    for (int r = 0; r < R; r++) for (int l = 0; l < 64; l++)
      chk($signed(dram_byte(32'h50000 + r*32, l)) == ref_q[r][l], "LRU INT8 output");
    chk(int'(lru_shift) == ref_shift, "LRU scale exponent");
    begin
      automatic longint sum = 0;
      for (int l = 0; l < 64; l++) begin
        automatic logic [63:0] v = u_dram.peek(32'h60000 + l / 2);
        sum += v[(l % 2) * 32 +: 32];
      end
      chk(sum <= 65535 && sum >= 65535 - 64, "softmax sums to one");
    end

    // ---- adaptive parallel speculative decoding ----
    csr(0, {2'b0, 14'd101, 3'b0, 13'd100});
    csr(1, {2'b0, 14'd111, 3'b0, 13'd110});
    csr(2, {16'd80, 2'b0, 6'd15, 2'b0, 6'd5});
    csr(4, 32'h1);
    while (!apsd_done) @(negedge clk);
    repeat (200) @(negedge clk);
    chk(int'(committed) >= 80 && pos == int'(committed), "APSD committed count");

    $display("dependency stalls %0d, out-of-order issues %0d, fetch queue-full %0d, buffer-port stalls %0d, ReRAM-path stalls %0d",
      n_dep, n_ooo, n_fetch_full, n_gtb_stall, n_rli_stall);
    $display("TFTE runs %0d (min fetches %0d of 128), LRU %0d, NLPU %0d, link words %0d, APSD continue %0d revert %0d committed %0d",
      n_tfte, fetches_min, n_lru, n_nlpu, n_tx, n_continue, n_revert, committed);
    chk(n_dep > 0, "dependency stall");
    chk(n_ooo > 0, "out-of-order issue");
    chk(n_fetch_full > 0, "fetch queue-full stall");
    chk(n_gtb_stall > 0, "buffer-port stall");
    chk(n_rli_stall > 0, "ReRAM write stall");
    chk(fetches_min < 128, "tile fusion fetch saving");
    chk(n_lru > 0 && n_nlpu > 0 && n_tx > 0, "LRU, NLPU, link used");
    chk(n_continue > 0, "APSD parallel continuation");
    chk(n_revert > 0, "APSD fallback to short drafting");
    chk(rli_overflow == 0, "no RLI overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
