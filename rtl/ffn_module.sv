// ffn_module: the feed-forward network (FFN) module of the accelerator.
//
// Same organization as the MHA module, but the QMM engine only needs the
// activation x binarized weight pattern (the FFN has no activation x
// activation product) and the softmax is replaced by the ReLU unit. One
// command runs one QMM followed by the row pipeline: vector unit
// (dequantization, optional residual add) -> ReLU | layer norm | bypass ->
// elastic quantization, with the quantized rows and the FP16 rows written to
// the output buffers for the DMA.
//
// Datapath (all buffers are ping-pong):
//   X buffer (activations, P_PE*NX bits per word, multicast) + Y buffer
//   (binarized weights, P_DPU*P_PE bits per word) -> QMM engine
//   -> row buffer (P_DPU -> P_VU lanes) -> vector unit (+ residual buffer)
//   -> row buffer (P_VU -> P_LN lanes) -> ReLU | layer norm | bypass
//   -> row buffer (P_LN -> P_QUAN lanes) -> quantization unit
//   -> quantized output buffer and FP output buffer.
//
// Interface and timing as in mha_module: cmd_valid/cmd/busy/done, DMA-side
// buffer ports, buf_commit and buf_release for the bank handshake.
//
// From the paper: the unit set (QMM engine, VU, QU, LN, ReLU), the buffers
// and the parallelism parameters. Own choices: as in mha_module.
module ffn_module
  import bat_pkg::*;
#(
  parameter int unsigned NX        = 4,
  parameter int unsigned P_PE      = 64,
  parameter int unsigned P_DPU     = 16,
  parameter int unsigned ACC_W     = 24,
  parameter int unsigned P_VU      = 96,
  parameter int unsigned P_LN      = 8,
  parameter int unsigned P_QUAN    = 128,
  parameter int unsigned ROW_MAX   = 1536,
  parameter int unsigned LN_MAX    = 384,
  parameter int unsigned EXT_W     = 256,
  parameter int unsigned X_DEPTH   = 128,
  parameter int unsigned Y_DEPTH   = 576,
  parameter int unsigned RES_DEPTH = 128,
  parameter int unsigned OUT_DEPTH = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // command
  input  logic               cmd_valid,
  input  module_cmd_t        cmd,
  output logic               busy,
  output logic               done,
  // DMA side
  input  logic               buf_wr_en,
  input  dma_target_e        buf_wr_target,
  input  logic               buf_wr_bank,
  input  logic [15:0]        buf_wr_addr,
  input  logic [EXT_W-1:0]   buf_wr_data,
  input  logic               buf_rd_en,
  input  dma_target_e        buf_rd_target,
  input  logic               buf_rd_bank,
  input  logic [15:0]        buf_rd_addr,
  output logic [EXT_W-1:0]   buf_rd_data,
  input  logic               buf_commit,
  input  dma_target_e        buf_commit_target,
  input  logic               buf_commit_bank,
  input  logic               buf_release,
  input  dma_target_e        buf_release_target,
  input  logic               buf_release_bank,
  output logic [1:0]         x_full,
  output logic [1:0]         y_full,
  output logic [1:0]         res_full,
  output logic [1:0]         out_full
);
  localparam int XW      = P_PE * NX;
  localparam int YW      = P_DPU * P_PE;
  localparam int X_RATIO = XW / EXT_W;
  localparam int Y_RATIO = YW / EXT_W;
  localparam int R_RATIO = P_VU * 16 / EXT_W;
  localparam int Q_RATIO = P_QUAN * NX / EXT_W;
  localparam int F_RATIO = P_QUAN * 16 / EXT_W;
  localparam int XAW = $clog2(X_DEPTH);
  localparam int YAW = $clog2(Y_DEPTH);
  localparam int RAW = $clog2(RES_DEPTH);
  localparam int OAW = $clog2(OUT_DEPTH);
  localparam int QAW = $clog2(OUT_DEPTH * Q_RATIO);
  localparam int FAW = $clog2(OUT_DEPTH * F_RATIO);
  localparam int DW  = $clog2(X_DEPTH > Y_DEPTH ? X_DEPTH : Y_DEPTH);

  // ---------------------------------------------------------------- command
  module_cmd_t c_q;
  logic [11:0] rows_done;
  logic [OAW-1:0] out_cnt;
  logic [RAW-1:0] res_cnt;
  logic qmm_start, qmm_busy, qmm_done;

  assign qmm_start = cmd_valid && !busy;

  // ---------------------------------------------------------------- buffers
  logic x_rd, y_rd;
  logic [DW-1:0] x_addr, y_addr;
  logic [XW-1:0] x_word;
  logic [YW-1:0] y_word;
  logic [R_RATIO*EXT_W-1:0] res_word;
  logic res_rd;
  logic [EXT_W-1:0] q_rd_word, f_rd_word;
  logic q_wr, release_in;
  logic [P_QUAN-1:0][NX-1:0] q_data;
  fp16_t [P_QUAN-1:0] f_data;
  logic [1:0] q_full, f_full;

  pingpong_buffer #(.SUB_W(EXT_W), .WR_RATIO(1), .RD_RATIO(X_RATIO), .DEPTH(X_DEPTH * X_RATIO)) u_xbuf (
    .clk, .rst_n,
    .wr_en(buf_wr_en && buf_wr_target == TGT_X), .wr_bank(buf_wr_bank),
    .wr_addr(buf_wr_addr[$clog2(X_DEPTH * X_RATIO)-1:0]), .wr_data(buf_wr_data),
    .rd_en(x_rd), .rd_bank(c_q.x_bank), .rd_addr(x_addr[XAW-1:0]), .rd_data(x_word),
    .commit(buf_commit && buf_commit_target == TGT_X), .commit_bank(buf_commit_bank),
    .release_en(release_in), .release_bank(c_q.x_bank), .full(x_full)
  );
  pingpong_buffer #(.SUB_W(EXT_W), .WR_RATIO(1), .RD_RATIO(Y_RATIO), .DEPTH(Y_DEPTH * Y_RATIO)) u_ybuf (
    .clk, .rst_n,
    .wr_en(buf_wr_en && buf_wr_target == TGT_Y), .wr_bank(buf_wr_bank),
    .wr_addr(buf_wr_addr[$clog2(Y_DEPTH * Y_RATIO)-1:0]), .wr_data(buf_wr_data),
    .rd_en(y_rd), .rd_bank(c_q.y_bank), .rd_addr(y_addr[YAW-1:0]), .rd_data(y_word),
    .commit(buf_commit && buf_commit_target == TGT_Y), .commit_bank(buf_commit_bank),
    .release_en(release_in), .release_bank(c_q.y_bank), .full(y_full)
  );
  pingpong_buffer #(.SUB_W(EXT_W), .WR_RATIO(1), .RD_RATIO(R_RATIO), .DEPTH(RES_DEPTH * R_RATIO)) u_resbuf (
    .clk, .rst_n,
    .wr_en(buf_wr_en && buf_wr_target == TGT_RES), .wr_bank(buf_wr_bank),
    .wr_addr(buf_wr_addr[$clog2(RES_DEPTH * R_RATIO)-1:0]), .wr_data(buf_wr_data),
    .rd_en(res_rd), .rd_bank(c_q.res_bank), .rd_addr(res_cnt), .rd_data(res_word),
    .commit(buf_commit && buf_commit_target == TGT_RES), .commit_bank(buf_commit_bank),
    .release_en(release_in && c_q.res_en), .release_bank(c_q.res_bank), .full(res_full)
  );
  // quantized and FP output buffers, written by the quantization stage
  pingpong_buffer #(.SUB_W(EXT_W), .WR_RATIO(Q_RATIO), .RD_RATIO(1), .DEPTH(OUT_DEPTH * Q_RATIO)) u_qbuf (
    .clk, .rst_n,
    .wr_en(q_wr), .wr_bank(c_q.out_bank), .wr_addr(OAW'(c_q.out_base) + out_cnt), .wr_data(q_data),
    .rd_en(buf_rd_en && buf_rd_target == TGT_X), .rd_bank(buf_rd_bank),
    .rd_addr(buf_rd_addr[QAW-1:0]), .rd_data(q_rd_word),
    .commit(done), .commit_bank(c_q.out_bank),
    .release_en(buf_release && buf_release_target == TGT_X), .release_bank(buf_release_bank), .full(q_full)
  );
  pingpong_buffer #(.SUB_W(EXT_W), .WR_RATIO(F_RATIO), .RD_RATIO(1), .DEPTH(OUT_DEPTH * F_RATIO)) u_fbuf (
    .clk, .rst_n,
    .wr_en(q_wr), .wr_bank(c_q.out_bank), .wr_addr(OAW'(c_q.out_base) + out_cnt), .wr_data(f_data),
    .rd_en(buf_rd_en && buf_rd_target == TGT_Y), .rd_bank(buf_rd_bank),
    .rd_addr(buf_rd_addr[FAW-1:0]), .rd_data(f_rd_word),
    .commit(done), .commit_bank(c_q.out_bank),
    .release_en(buf_release && buf_release_target == TGT_Y), .release_bank(buf_release_bank), .full(f_full)
  );
  assign out_full = q_full & f_full;
  logic rd_sel_q;
  always_ff @(posedge clk) if (buf_rd_en) rd_sel_q <= (buf_rd_target == TGT_Y);
  assign buf_rd_data = rd_sel_q ? f_rd_word : q_rd_word;

  // ---------------------------------------------------------------- QMM engine
  logic [P_DPU-1:0][P_PE*NX-1:0] eng_x, eng_y;
  logic e_valid, e_last, row_go, row_start;
  logic [P_DPU-1:0][ACC_W-1:0] e_data;
  // pattern (a) only: the activation chunk sits in lane 0 (multicast) and
  // the weight bits fill the low P_DPU*P_PE bits
  assign eng_x = {{(P_DPU*P_PE*NX - XW){1'b0}}, x_word};
  assign eng_y = {{(P_DPU*P_PE*NX - YW){1'b0}}, y_word};
  qmm_engine #(.NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .AW(DW), .DIM_W(12)) u_qmm (
    .clk, .rst_n, .start(qmm_start), .pattern(PAT_ACT_WEIGHT), .x_signed(cmd.x_signed),
    .m_rows(cmd.m_rows), .n_groups(cmd.n_groups), .kch(cmd.kch),
    .x_base(DW'(cmd.x_base)), .y_base(DW'(cmd.y_base)), .busy(qmm_busy), .done(qmm_done),
    .x_rd, .x_addr, .x_rdata(eng_x), .y_rd, .y_addr, .y_rdata(eng_y),
    .row_go(row_go), .row_start(row_start),
    .out_valid(e_valid), .out_row_last(e_last), .out_data(e_data)
  );

  // ------------------------------------------- row buffer 0: P_DPU -> P_VU
  logic rb0_ready, rb0_v, rb0_l, rb0_rdy, rb0_fire;
  logic [P_VU-1:0][ACC_W-1:0] rb0_d;
  row_buffer #(.EW(ACC_W), .WL(P_DPU), .RL(P_VU), .ROW_MAX(ROW_MAX)) u_rb0 (
    .clk, .rst_n, .in_valid(e_valid), .in_ready(rb0_ready), .in_last(e_last), .in_data(e_data),
    .out_valid(rb0_v), .out_ready(rb0_rdy), .out_last(rb0_l), .out_data(rb0_d)
  );
  assign rb0_fire = rb0_v && rb0_rdy;

  // residual read runs alongside one register stage
  logic v1, l1;
  logic [P_VU-1:0][ACC_W-1:0] d1;
  assign res_rd = rb0_fire && c_q.res_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; l1 <= 1'b0; d1 <= '0;
    end else begin
      v1 <= rb0_fire; l1 <= rb0_l; d1 <= rb0_d;
    end
  end

  // ---------------------------------------------------------------- vector unit
  logic vu_v, vu_l;
  fp16_t [P_VU-1:0] vu_d;
  vector_unit #(.LANES(P_VU), .ACC_W(ACC_W)) u_vu (
    .clk, .rst_n, .in_valid(v1), .in_last(l1), .in_is_int(1'b1), .in_int(d1), .in_fp('0),
    .res(res_word), .scale(c_q.scale), .mul_en(1'b1), .add_en(c_q.res_en),
    .out_valid(vu_v), .out_last(vu_l), .out_data(vu_d)
  );

  // ------------------------------------------- row buffer 1: P_VU -> P_LN
  logic rb1_ready, rb1_v, rb1_l, rb1_rdy;
  fp16_t [P_LN-1:0] rb1_d;
  row_buffer #(.EW(16), .WL(P_VU), .RL(P_LN), .ROW_MAX(ROW_MAX)) u_rb1 (
    .clk, .rst_n, .in_valid(vu_v), .in_ready(rb1_ready), .in_last(vu_l), .in_data(vu_d),
    .out_valid(rb1_v), .out_ready(rb1_rdy), .out_last(rb1_l), .out_data(rb1_d)
  );

  // ------------------------------------------------ row credits (back-pressure)
  // The QMM engine, the vector unit and the post units have no stall inside a
  // row, so flow control works on whole rows: a row may leave the QMM engine
  // only while fewer than two rows are between it and the end of row buffer
  // 0, and a row may leave row buffer 0 only while fewer than two rows are
  // between it and the end of row buffer 1. Each row buffer has two banks,
  // so neither can overflow.
  logic [1:0] cr0, cr1;
  logic rb0_mid, rb0_done, rb1_done, rb0_begin;
  assign rb0_done  = rb0_fire && rb0_l;
  assign rb1_done  = rb1_v && rb1_rdy && rb1_l;
  assign rb0_begin = rb0_fire && !rb0_mid;
  assign row_go    = (cr0 < 2'd2);
  assign rb0_rdy   = rb0_mid || (cr1 < 2'd2);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cr0 <= '0; cr1 <= '0; rb0_mid <= 1'b0;
    end else begin
      cr0 <= cr0 + 2'(row_start) - 2'(rb0_done);
      cr1 <= cr1 + 2'(rb0_begin) - 2'(rb1_done);
      if (rb0_fire) rb0_mid <= !rb0_l;
    end
  end

  // ---------------------------------------------------------------- post stage
  logic ln_in_ready, ln_v, ln_l;
  fp16_t [P_LN-1:0] ln_d;
  logic rbq_ready, p_v, p_l;
  fp16_t [P_LN-1:0] p_d;
  logic ln_prm_we;
  assign ln_prm_we = buf_wr_en && buf_wr_target == TGT_LN;

  layernorm_unit #(.LANES(P_LN), .ROW_MAX(LN_MAX)) u_ln (
    .clk, .rst_n, .in_valid(rb1_v && c_q.post_op == POST_LN), .in_ready(ln_in_ready),
    .in_last(rb1_l), .in_data(rb1_d), .eps(c_q.eps),
    .prm_we(ln_prm_we), .prm_addr(buf_wr_addr[$clog2(LN_MAX / P_LN)-1:0]),
    .prm_gamma(buf_wr_data[P_LN*16-1:0]), .prm_beta(buf_wr_data[2*P_LN*16-1:P_LN*16]),
    .out_valid(ln_v), .out_last(ln_l), .out_data(ln_d)
  );

  logic relu_v, relu_l;
  fp16_t [P_LN-1:0] relu_d;
  relu_unit #(.LANES(P_LN)) u_relu (
    .clk, .rst_n, .en(c_q.post_op == POST_RELU), .in_valid(rb1_v && rbq_ready && c_q.post_op != POST_LN),
    .in_last(rb1_l), .in_data(rb1_d), .out_valid(relu_v), .out_last(relu_l), .out_data(relu_d)
  );
  always_comb begin
    if (c_q.post_op == POST_LN) begin
      rb1_rdy = ln_in_ready;
      p_v = ln_v; p_l = ln_l; p_d = ln_d;
    end else begin
      // ReLU (or bypass with the ReLU disabled), one register stage
      rb1_rdy = rbq_ready;
      p_v = relu_v; p_l = relu_l; p_d = relu_d;
    end
  end

  // ------------------------------------------- row buffer Q: P_LN -> P_QUAN
  logic rbq_v, rbq_l;
  fp16_t [P_QUAN-1:0] rbq_d;
  row_buffer #(.EW(16), .WL(P_LN), .RL(P_QUAN), .ROW_MAX(ROW_MAX)) u_rbq (
    .clk, .rst_n, .in_valid(p_v), .in_ready(rbq_ready), .in_last(p_l), .in_data(p_d),
    .out_valid(rbq_v), .out_ready(1'b1), .out_last(rbq_l), .out_data(rbq_d)
  );

  // ---------------------------------------------------------------- quantization
  logic qu_v, qu_l;
  fp16_t [2:0][P_QUAN-1:0] fp_pipe;
  quant_unit #(.LANES(P_QUAN), .NB(NX)) u_qu (
    .clk, .rst_n, .in_valid(rbq_v), .in_last(rbq_l), .in_data(rbq_d),
    .beta(c_q.q_beta), .inv_alpha(c_q.q_inv_alpha), .is_signed(c_q.q_signed),
    .out_valid(qu_v), .out_last(qu_l), .out_data(q_data)
  );
  always_ff @(posedge clk) fp_pipe <= {fp_pipe[1:0], rbq_d};
  assign f_data = fp_pipe[2];
  assign q_wr   = qu_v;

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_q <= '0; busy <= 1'b0; done <= 1'b0; rows_done <= '0; out_cnt <= '0; res_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (qmm_start) begin
        c_q <= cmd; busy <= 1'b1; rows_done <= '0; out_cnt <= '0;
        res_cnt <= RAW'(cmd.res_base);
      end
      if (res_rd) res_cnt <= res_cnt + 1'b1;
      if (qu_v) begin
        out_cnt <= out_cnt + 1'b1;
        if (qu_l) begin
          rows_done <= rows_done + 1'b1;
          if (rows_done + 1'b1 == c_q.m_rows) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end
  assign release_in = done;

  a_rb0_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) e_valid |-> rb0_ready)
    else $error("ffn_module: QMM result row buffer overflow");
  a_rb1_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) vu_v |-> rb1_ready)
    else $error("ffn_module: vector unit row buffer overflow");
  a_inputs_loaded: assert property (@(posedge clk) disable iff (!rst_n)
      qmm_start |-> x_full[cmd.x_bank] && y_full[cmd.y_bank])
    else $error("ffn_module: command started on a bank that was not loaded");
endmodule
