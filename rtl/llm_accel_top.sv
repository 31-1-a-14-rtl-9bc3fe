// Logic die of the ReRAM-on-logic speculative-decoding LLM accelerator.
// The host (MCU) writes programs into the 64KB ISA buffer and a few control
// registers. The APSD controller decides when the draft-model program
// (context 0) and the target-model program (context 1) run; the top
// controller fetches their instructions into the four queues of the
// out-of-order scheduler (WDOS), which issues them to four engines:
//   queue 0  inter-chip transceiver (32-bit link)
//   queue 1  compute: tile-fused tensor engine (TFTE), local rotation unit
//            (LRU) with its buffer loads, non-linear unit (NLPU)
//   queue 2  ReRAM load: codebook fetcher (CFU) + ReRAM load interface (RLI)
//            moving draft-model codebooks from the four stacked dies into
//            the weight buffer
//   queue 3  external memory (EMAC) for target-model weights and KV cache
// Buffers: weight buffer (16 banks x 256 x 2048b = 1MB) and global token
// buffer (16 banks x 512 x 2048b = 2MB). The compute engine has priority on
// both; EMAC and transceiver buffer requests wait (stall) for a free bank,
// and ReRAM rows wait while the TFTE reads the weight buffer.
// Clocks: clk is the logic-die clock; clk2x is the 200 MHz stabilizer clock
// of the ReRAM interface, asynchronous to clk. The weight-buffer side of
// the RLI runs on clk here (the paper gives it a 250 MHz domain).
// The ReRAM dies, the MCU, the PLLs and the DRAM are outside this module:
// their signals are ports. Tokens produced by the models' output sampling
// enter on the dlm_*/tlm_* ports, which the paper does not detail.
module llm_accel_top
  import accel_pkg::*;
#(
  parameter int unsigned NDIE  = 4,
  parameter int unsigned DIE_W = 512,
  parameter int unsigned TOKW  = 17,
  parameter int unsigned MAXDL = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clk2x,
  input  logic                          rst2x_n,
  // MCU: ISA buffer writes and control registers
  input  logic                          mcu_isa_we,
  input  logic [12:0]                   mcu_isa_addr,
  input  logic [INSTR_W-1:0]            mcu_isa_wdata,
  input  logic                          mcu_csr_we,
  input  logic [2:0]                    mcu_csr_addr,
  input  logic [31:0]                   mcu_csr_wdata,
  // stacked ReRAM dies (row read to all dies at once)
  output logic                          rr_clk,
  output logic                          rr_req,
  output logic [14:0]                   rr_addr,
  input  logic                          rr_ready,
  input  logic [NDIE-1:0]               rr_valid,
  input  logic [NDIE-1:0][DIE_W-1:0]    rr_data,
  // external DRAM
  output logic                          dram_req,
  output logic                          dram_we,
  output logic [31:0]                   dram_addr,
  output logic [63:0]                   dram_wdata,
  input  logic                          dram_ready,
  input  logic                          dram_rvalid,
  input  logic [63:0]                   dram_rdata,
  // inter-chip link
  output logic                          tx_valid,
  output logic [31:0]                   tx_data,
  input  logic                          tx_ready,
  input  logic                          rx_valid,
  input  logic [31:0]                   rx_data,
  // sampled tokens of the draft and target models
  input  logic                          dlm_done,
  input  logic [MAXDL-1:0][TOKW-1:0]    dlm_tokens,
  input  logic                          tlm_done,
  input  logic [MAXDL:0][TOKW-1:0]      tlm_tokens,
  output logic                          dlm_req,
  output logic [5:0]                    dlm_len,
  output logic                          dlm_spec,
  output logic                          tlm_req,
  output logic [5:0]                    tlm_len,
  output logic [MAXDL-1:0][TOKW-1:0]    tlm_drafts,
  // results and status
  output logic                          commit_valid,
  output logic [5:0]                    commit_n,
  output logic [MAXDL:0][TOKW-1:0]      commit_tokens,
  output apsd_mode_e                    apsd_mode,
  output logic                          apsd_done,
  output logic [15:0]                   committed,
  output logic [15:0]                   n_continue,
  output logic [15:0]                   n_revert,
  output logic [15:0]                   n_rejected,
  output logic [4:0]                    lru_shift,
  output logic [NQ-1:0]                 q_idle,
  output logic [NDIE-1:0]               rli_overflow
);
  localparam int unsigned NB = 16, ROW_W = 2048;

  // ---------------- control registers ----------------
  logic [1:0][12:0] csr_pc_start;
  logic [1:0][13:0] csr_pc_end;
  logic [5:0]       csr_short_dl, csr_long_dl;
  logic [15:0]      csr_n_target;
  logic [3:0]       csr_lru_obank;
  logic [8:0]       csr_lru_orow;
  logic             apsd_start;
  logic [1:0]       manual_go;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_pc_start <= '0; csr_pc_end <= '0; csr_short_dl <= 6'd5; csr_long_dl <= 6'd15;
      csr_n_target <= '0; csr_lru_obank <= '0; csr_lru_orow <= '0; apsd_start <= 1'b0; manual_go <= '0;
    end else begin
      apsd_start <= 1'b0; manual_go <= '0;
      if (mcu_csr_we) begin
        unique case (mcu_csr_addr)
          3'd0: begin csr_pc_start[0] <= mcu_csr_wdata[12:0]; csr_pc_end[0] <= mcu_csr_wdata[29:16]; end
          3'd1: begin csr_pc_start[1] <= mcu_csr_wdata[12:0]; csr_pc_end[1] <= mcu_csr_wdata[29:16]; end
          3'd2: begin csr_short_dl <= mcu_csr_wdata[5:0]; csr_long_dl <= mcu_csr_wdata[13:8]; csr_n_target <= mcu_csr_wdata[31:16]; end
          3'd3: begin csr_lru_obank <= mcu_csr_wdata[3:0]; csr_lru_orow <= mcu_csr_wdata[12:4]; end
          3'd4: begin apsd_start <= mcu_csr_wdata[0]; manual_go <= mcu_csr_wdata[2:1]; end
          default: ;
        endcase
      end
    end
  end

  // ---------------- APSD controller ----------------
  logic apsd_busy;
  apsd_ctrl #(.TOKW(TOKW), .MAXDL(MAXDL)) u_apsd (
    .clk, .rst_n, .start(apsd_start), .cfg_short_dl(csr_short_dl), .cfg_long_dl(csr_long_dl),
    .cfg_n_target(csr_n_target), .mode(apsd_mode), .busy(apsd_busy), .done(apsd_done),
    .dlm_req, .dlm_len, .dlm_spec, .dlm_done, .dlm_tokens,
    .tlm_req, .tlm_len, .tlm_drafts, .tlm_done, .tlm_tokens,
    .commit_valid, .commit_n, .commit_tokens, .committed, .n_continue, .n_revert, .n_rejected);

  // ---------------- ISA buffer + top controller ----------------
  logic               isa_en, tc_isa_en;
  logic [12:0]        tc_isa_addr;
  logic [INSTR_W-1:0] isa_rdata;
  logic [1:0]         ctx_busy, ctx_fetched;
  logic               push, fetch_stall;
  instr_t             push_instr;
  logic [NQ-1:0]      push_ready;

  assign isa_en = mcu_isa_we || tc_isa_en;
  sram_sp #(.DEPTH(8192), .WIDTH(INSTR_W)) u_isa (
    .clk, .en(isa_en), .we(mcu_isa_we), .addr(mcu_isa_we ? mcu_isa_addr : tc_isa_addr),
    .wdata(mcu_isa_wdata), .rdata(isa_rdata));

  top_ctrl #(.NCTX(2), .IAW(13)) u_tc (
    .clk, .rst_n, .go({tlm_req, dlm_req} | manual_go), .pc_start(csr_pc_start), .pc_end(csr_pc_end),
    .ctx_busy, .ctx_fetched, .isa_en(tc_isa_en), .isa_addr(tc_isa_addr), .isa_rdata,
    .push, .push_instr, .push_ready, .full_stall(fetch_stall));

  // ---------------- scheduler ----------------
  logic [NQ-1:0]      issue_valid, unit_done, q_empty, unit_busy, dep_stall;
  instr_t [NQ-1:0]    issue_instr;
  logic [NQ-1:0][NQ-1:0][3:0] cnt_matrix;

  wdos #(.QDEPTH(16), .CW(4)) u_wdos (
    .clk, .rst_n, .push, .push_instr, .push_ready, .issue_valid, .issue_instr,
    .unit_done, .q_empty, .unit_busy, .cnt_matrix, .dep_stall);
  assign q_idle = q_empty & ~unit_busy;

  // ---------------- buffers ----------------
  logic [NB-1:0]              wb_en, wb_we, gtb_en, gtb_we;
  logic [NB-1:0][7:0]         wb_addr;
  logic [NB-1:0][8:0]         gtb_addr;
  logic [NB-1:0][ROW_W-1:0]   wb_wdata, wb_rdata, gtb_wdata, gtb_rdata;

  sram_banked #(.NBANKS(NB), .BANK_DEPTH(256), .WIDTH(ROW_W)) u_wb (
    .clk, .en(wb_en), .we(wb_we), .addr(wb_addr), .wdata(wb_wdata), .rdata(wb_rdata));
  sram_banked #(.NBANKS(NB), .BANK_DEPTH(512), .WIDTH(ROW_W)) u_gtb (
    .clk, .en(gtb_en), .we(gtb_we), .addr(gtb_addr), .wdata(gtb_wdata), .rdata(gtb_rdata));

  // ---------------- queue 2: ReRAM load ----------------
  op_rload_t rl_op;
  logic      cfu_busy, cfu_done, cf_avalid, cf_aready;
  logic [3:0] cf_abank;
  logic [7:0] cf_arow;
  logic       rli_we, rli_ready;
  logic [3:0] rli_bank;
  logic [7:0] rli_addr;
  logic [ROW_W-1:0] rli_wdata;
  logic [9:0] rl_left;
  logic       rl_active;

  assign rl_op = op_rload_t'(issue_instr[Q_RLOAD].payload);

  cfu #(.RAW(15), .NBANKS(NB), .WAW(8)) u_cfu (
    .clk, .rst_n, .start(issue_valid[Q_RLOAD]), .rr_base(rl_op.rr_base), .wb_bank_i(rl_op.wb_bank),
    .wb_base(rl_op.wb_base), .n_rows(rl_op.n_rows), .busy(cfu_busy), .done(cfu_done),
    .rr_req, .rr_addr, .rr_ready, .addr_valid(cf_avalid), .addr_bank(cf_abank), .addr_row(cf_arow),
    .addr_ready(cf_aready));

  rli #(.NDIE(NDIE), .DIE_W(DIE_W), .NBANKS(NB), .WAW(8)) u_rli (
    .clk2x, .rst2x_n, .rr_clk, .rr_valid, .rr_data, .clk_wb(clk), .rstwb_n(rst_n),
    .addr_valid(cf_avalid), .addr_bank(cf_abank), .addr_row(cf_arow), .addr_ready(cf_aready),
    .wb_we(rli_we), .wb_bank(rli_bank), .wb_addr(rli_addr), .wb_wdata(rli_wdata),
    .wb_ready(rli_ready), .overflow(rli_overflow));

  // the ReRAM-load instruction completes when its last row is in the buffer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin rl_left <= '0; rl_active <= 1'b0; end
    else if (issue_valid[Q_RLOAD]) begin rl_left <= {1'b0, rl_op.n_rows}; rl_active <= 1'b1; end
    else if (rl_active) begin
      if (rl_left == 0 || (rli_we && rl_left == 1)) rl_active <= 1'b0;
      if (rli_we) rl_left <= rl_left - 1'b1;
    end
  end
  assign unit_done[Q_RLOAD] = rl_active && (rl_left == 0 || (rli_we && rl_left == 1));

  // ---------------- queue 3: EMAC ----------------
  op_emac_t  em_op;
  logic      em_sel;
  logic      em_busy, em_done, em_breq, em_bwe, em_gnt;
  logic [12:0] em_baddr;
  logic [ROW_W-1:0] em_bwdata, em_brdata;
  assign em_op = op_emac_t'(issue_instr[Q_EMAC].payload);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) em_sel <= 1'b0; else if (issue_valid[Q_EMAC]) em_sel <= em_op.buf_sel;

  emac #(.ROW_W(ROW_W), .DRAM_W(64), .BAW(13)) u_emac (
    .clk, .rst_n, .start(issue_valid[Q_EMAC]), .dir(em_op.dir), .dram_base({8'd0, em_op.dram_base}),
    .buf_base(em_op.buf_base), .nrows(em_op.nrows), .busy(em_busy), .done(em_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_ready, .dram_rvalid, .dram_rdata,
    .buf_req(em_breq), .buf_we(em_bwe), .buf_addr(em_baddr), .buf_wdata(em_bwdata),
    .buf_gnt(em_gnt), .buf_rdata(em_brdata));
  assign unit_done[Q_EMAC] = em_done;

  // ---------------- queue 0: transceiver ----------------
  op_xcvr_t  xc_op;
  logic      xc_busy, xc_done, xc_breq, xc_bwe, xc_gnt;
  logic [12:0] xc_baddr;
  logic [ROW_W-1:0] xc_bwdata;
  assign xc_op = op_xcvr_t'(issue_instr[Q_XCVR].payload);

  inter_chip_xcvr #(.ROW_W(ROW_W), .LINK_W(32), .BAW(13)) u_xcvr (
    .clk, .rst_n, .start(issue_valid[Q_XCVR]), .dir(xc_op.dir), .buf_base(xc_op.buf_base),
    .nrows(xc_op.nrows), .busy(xc_busy), .done(xc_done), .tx_valid, .tx_data, .tx_ready,
    .rx_valid, .rx_data, .buf_req(xc_breq), .buf_we(xc_bwe), .buf_addr(xc_baddr),
    .buf_wdata(xc_bwdata), .buf_gnt(xc_gnt), .buf_rdata(gtb_rdata[xc_baddr[12:9]]));
  assign unit_done[Q_XCVR] = xc_done;

  // ---------------- queue 1: compute ----------------
  typedef enum logic [3:0] {
    C_IDLE, C_T_RD, C_T_START, C_T_WAIT, C_T_WR,
    C_L_RD, C_L_WR, C_R_RUN, C_N_RD, C_N_START, C_N_WAIT, C_N_WR, C_DONE
  } cstate_e;
  cstate_e cstate;
  instr_t  cinstr;
  op_tfte_t     c_tfte;
  op_ltb_load_t c_ld;
  op_lru_t      c_lru;
  op_nlpu_t     c_nl;
  logic [9:0]   c_cnt;

  assign c_tfte = op_tfte_t'(cinstr.payload);
  assign c_ld   = op_ltb_load_t'(cinstr.payload);
  assign c_lru  = op_lru_t'(cinstr.payload);
  assign c_nl   = op_nlpu_t'(cinstr.payload);

  // TFTE
  logic                          t_start, t_busy, t_done;
  logic [NB-1:0]                 t_wb_en;
  logic [NB-1:0][7:0]            t_wb_addr;
  logic [NB-1:0][15:0][7:0]      t_out;
  logic [7:0]                    t_fetches;
  logic [NB-1:0][7:0][1:0]       t_idx;
  always_comb for (int i = 0; i < NB; i++) t_idx[i] = c_tfte.idx;

  tfte #(.NCL(NB), .NBLK(8), .NENT(4), .TW(32), .COLS(16), .WAW(8)) u_tfte (
    .clk, .rst_n, .start(t_start), .idx(t_idx), .tiles(gtb_rdata), .fuse_shift(c_tfte.fuse_shift),
    .out_shift(c_tfte.out_shift), .act_relu(c_tfte.relu), .cb_base(c_tfte.cb_base),
    .wb_en(t_wb_en), .wb_addr(t_wb_addr), .wb_rdata(wb_rdata), .busy(t_busy), .done(t_done),
    .out(t_out), .fetches(t_fetches));
  assign t_start = (cstate == C_T_START);

  // LRU
  logic                 l_hen, l_hwe, l_busy, l_done, l_qvalid, l_start;
  logic [8:0]           l_haddr, l_qrow;
  logic [ROW_W-1:0]     l_hrdata;
  logic [63:0][7:0]     l_qdata;

  lru #(.LANES(64), .DW(32), .DEPTH(512)) u_lru (
    .clk, .rst_n, .host_en(l_hen), .host_we(l_hwe), .host_addr(l_haddr),
    .host_wdata(gtb_rdata[c_ld.gbank]), .host_rdata(l_hrdata),
    .start(l_start), .cfg_k(c_lru.k), .cfg_m(c_lru.m), .cfg_rows(c_lru.rows),
    .cfg_hbase(c_lru.hbase), .cfg_sbase(c_lru.sbase), .cfg_scale_q15(c_lru.scale_q15),
    .busy(l_busy), .done(l_done), .q_valid(l_qvalid), .q_row(l_qrow), .q_data(l_qdata), .q_shift(lru_shift));
  assign l_hen   = (cstate == C_L_WR);
  assign l_hwe   = (cstate == C_L_WR);
  assign l_haddr = c_ld.lrow + 9'(c_cnt);

  // NLPU
  logic                 n_start, n_busy, n_done;
  logic [63:0][31:0]    n_out;
  nlpu #(.N(64)) u_nlpu (
    .clk, .rst_n, .start(n_start), .softmax(c_nl.softmax), .in_row(gtb_rdata[c_nl.gbank]),
    .busy(n_busy), .done(n_done), .out_row(n_out));
  assign n_start = (cstate == C_N_START);

  logic c_lru_started;
  assign l_start = (cstate == C_R_RUN) && !c_lru_started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cstate <= C_IDLE; cinstr <= '0; c_cnt <= '0; c_lru_started <= 1'b0;
    end else begin
      unique case (cstate)
        C_IDLE: if (issue_valid[Q_COMP]) begin
          cinstr <= issue_instr[Q_COMP]; c_cnt <= '0; c_lru_started <= 1'b0;
          unique case (cop_e'(issue_instr[Q_COMP].payload[PAYLOAD_W-1 -: 3]))
            OP_TFTE:     cstate <= C_T_RD;
            OP_LTB_LOAD: cstate <= C_L_RD;
            OP_LRU:      cstate <= C_R_RUN;
            OP_NLPU:     cstate <= C_N_RD;
            default:     cstate <= C_DONE;
          endcase
        end
        C_T_RD:    cstate <= C_T_START;
        C_T_START: cstate <= C_T_WAIT;
        C_T_WAIT:  if (t_done) cstate <= C_T_WR;
        C_T_WR:    cstate <= C_DONE;
        C_L_RD:    cstate <= C_L_WR;
        C_L_WR: begin
          c_cnt <= c_cnt + 1'b1;
          cstate <= (c_cnt + 1'b1 == c_ld.n) ? C_DONE : C_L_RD;
        end
        C_R_RUN: begin
          c_lru_started <= 1'b1;
          if (l_done) cstate <= C_DONE;
        end
        C_N_RD:    cstate <= C_N_START;
        C_N_START: cstate <= C_N_WAIT;
        C_N_WAIT:  if (n_done) cstate <= C_N_WR;
        C_N_WR:    cstate <= C_DONE;
        C_DONE:    cstate <= C_IDLE;
        default:   cstate <= C_IDLE;
      endcase
    end
  end
  assign unit_done[Q_COMP] = (cstate == C_DONE);

  // ---------------- buffer port arbitration ----------------
  // global token buffer: compute > EMAC > transceiver, per bank
  logic [NB-1:0] g_comp;
  always_comb begin
    gtb_en = '0; gtb_we = '0; gtb_addr = '0; gtb_wdata = '0; g_comp = '0;
    unique case (cstate)
      C_T_RD: for (int b = 0; b < NB; b++) begin
        gtb_en[b] = 1'b1; gtb_addr[b] = c_tfte.gtb_row; g_comp[b] = 1'b1;
      end
      C_T_WR: for (int b = 0; b < NB; b++) begin
        gtb_en[b] = 1'b1; gtb_we[b] = 1'b1; gtb_addr[b] = c_tfte.out_row;
        gtb_wdata[b] = ROW_W'(t_out[b]); g_comp[b] = 1'b1;
      end
      C_L_RD: begin
        gtb_en[c_ld.gbank] = 1'b1; gtb_addr[c_ld.gbank] = c_ld.grow + 9'(c_cnt); g_comp[c_ld.gbank] = 1'b1;
      end
      C_N_RD: begin
        gtb_en[c_nl.gbank] = 1'b1; gtb_addr[c_nl.gbank] = c_nl.src_row; g_comp[c_nl.gbank] = 1'b1;
      end
      C_N_WR: begin
        gtb_en[c_nl.gbank] = 1'b1; gtb_we[c_nl.gbank] = 1'b1; gtb_addr[c_nl.gbank] = c_nl.dst_row;
        gtb_wdata[c_nl.gbank] = n_out; g_comp[c_nl.gbank] = 1'b1;
      end
      default: ;
    endcase
    if (l_qvalid) begin
      gtb_en[csr_lru_obank] = 1'b1; gtb_we[csr_lru_obank] = 1'b1;
      gtb_addr[csr_lru_obank] = csr_lru_orow + l_qrow;
      gtb_wdata[csr_lru_obank] = ROW_W'(l_qdata); g_comp[csr_lru_obank] = 1'b1;
    end
    em_gnt = 1'b0;
    if (em_breq && !em_sel && !g_comp[em_baddr[12:9]]) begin
      em_gnt = 1'b1;
      gtb_en[em_baddr[12:9]] = 1'b1; gtb_we[em_baddr[12:9]] = em_bwe;
      gtb_addr[em_baddr[12:9]] = em_baddr[8:0]; gtb_wdata[em_baddr[12:9]] = em_bwdata;
    end
    xc_gnt = 1'b0;
    if (xc_breq && !g_comp[xc_baddr[12:9]] && !(em_gnt && !em_sel && em_baddr[12:9] == xc_baddr[12:9])) begin
      xc_gnt = 1'b1;
      gtb_en[xc_baddr[12:9]] = 1'b1; gtb_we[xc_baddr[12:9]] = xc_bwe;
      gtb_addr[xc_baddr[12:9]] = xc_baddr[8:0]; gtb_wdata[xc_baddr[12:9]] = xc_bwdata;
    end
    // weight buffer: TFTE reads > ReRAM rows > EMAC
    wb_en = t_wb_en; wb_we = '0; wb_addr = t_wb_addr; wb_wdata = '0;
    rli_ready = !t_busy;
    if (rli_we) begin
      wb_en[rli_bank] = 1'b1; wb_we[rli_bank] = 1'b1; wb_addr[rli_bank] = rli_addr; wb_wdata[rli_bank] = rli_wdata;
    end
    if (em_breq && em_sel && !t_busy && !(rli_we && rli_bank == em_baddr[12:9])) begin
      em_gnt = 1'b1;
      wb_en[em_baddr[12:9]] = 1'b1; wb_we[em_baddr[12:9]] = em_bwe;
      wb_addr[em_baddr[12:9]] = em_baddr[7:0]; wb_wdata[em_baddr[12:9]] = em_bwdata;
    end
  end

  // EMAC read data comes from the buffer it addressed, one cycle later
  logic [3:0] em_bank_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) em_bank_q <= '0; else em_bank_q <= em_baddr[12:9];
  assign em_brdata = em_sel ? wb_rdata[em_bank_q] : gtb_rdata[em_bank_q];
endmodule
