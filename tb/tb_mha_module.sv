// tb_mha_module: commands through the mha_module at reduced size
// (P_PE = 8, P_DPU = 4, P_VU = 8, P_LN = 4, P_QUAN = 32, EXT_W = 128, rows of
// 32 elements). Operands are loaded through the DMA-side write port, banks
// are committed, a command runs, and both output buffers are read back.
// The reference, computed here with integer and real arithmetic, rounds
// every FP16 step of the dequantization (and residual add) and then applies
// softmax, layer norm or nothing and elastic quantization.
// Softmax rows use a scale that keeps scores in the range of a scaled
// QK^T (the unit does not subtract the row maximum).
// Checks: every quantized output (exact where the reference is exact, within
// one step after softmax or layer norm), every FP16 output (exact or within
// a tolerance), the bank flags of the handshake, and that a command takes at
// least its QMM issue cycles and at most 250 more.
module tb_mha_module;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int NX = 4, P_PE = 8, P_DPU = 4, ACC_W = 24, P_VU = 8, P_LN = 4, P_QUAN = 32;
  localparam int EXT_W = 128, ROW = 32, NG = ROW / P_DPU;
  localparam int XW = P_DPU * P_PE * NX, YW = P_DPU * P_PE * NX;
  localparam int X_RATIO = XW / EXT_W, Y_RATIO = YW / EXT_W, R_RATIO = P_VU * 16 / EXT_W;
  localparam int Q_RATIO = P_QUAN * NX / EXT_W, F_RATIO = P_QUAN * 16 / EXT_W;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  module_cmd_t cmd = '0;
  logic busy, done;
  logic buf_wr_en = 0, buf_wr_bank = 0, buf_rd_en = 0, buf_rd_bank = 0;
  dma_target_e buf_wr_target = TGT_X, buf_rd_target = TGT_X;
  logic [15:0] buf_wr_addr = '0, buf_rd_addr = '0;
  logic [EXT_W-1:0] buf_wr_data = '0, buf_rd_data;
  logic buf_commit = 0, buf_commit_bank = 0, buf_release = 0, buf_release_bank = 0;
  dma_target_e buf_commit_target = TGT_X, buf_release_target = TGT_X;
  logic [1:0] x_full, y_full, res_full, out_full;
  int checks = 0, failures = 0;

  mha_module #(.NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .P_VU(P_VU), .P_LN(P_LN), .P_SM(2),
    .P_QUAN(P_QUAN), .ROW_MAX(ROW), .LN_MAX(ROW), .EXT_W(EXT_W),
    .X_DEPTH(32), .Y_DEPTH(32), .RES_DEPTH(16), .OUT_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [XW-1:0] xw [32];
  logic [YW-1:0] yw [32];
  fp16_t res [4][ROW];
  real gam [ROW];
  real bet [ROW];

  task automatic wr(dma_target_e t, logic b, int a, logic [EXT_W-1:0] d);
    @(negedge clk);
    buf_wr_en = 1; buf_wr_target = t; buf_wr_bank = b; buf_wr_addr = 16'(a); buf_wr_data = d;
    @(negedge clk);
    buf_wr_en = 0;
  endtask
  task automatic commit_bank(dma_target_e t, logic b);
    @(negedge clk);
    buf_commit = 1; buf_commit_target = t; buf_commit_bank = b;
    @(negedge clk);
    buf_commit = 0;
  endtask
  task automatic rd(dma_target_e t, logic b, int a, output logic [EXT_W-1:0] d);
    @(negedge clk);
    buf_rd_en = 1; buf_rd_target = t; buf_rd_bank = b; buf_rd_addr = 16'(a);
    @(negedge clk);
    buf_rd_en = 0;
    d = buf_rd_data;
  endtask

  // load random operands into one bank of X and Y, and the residual rows
  task automatic load(logic b, int mrows, logic with_res);
    for (int a = 0; a < 32; a++) begin
      for (int j = 0; j < XW / 32; j++) xw[a][j*32 +: 32] = $urandom;
      for (int j = 0; j < YW / 32; j++) yw[a][j*32 +: 32] = $urandom;
      for (int j = 0; j < X_RATIO; j++) wr(TGT_X, b, a * X_RATIO + j, xw[a][j*EXT_W +: EXT_W]);
      for (int j = 0; j < Y_RATIO; j++) wr(TGT_Y, b, a * Y_RATIO + j, yw[a][j*EXT_W +: EXT_W]);
    end
    for (int r = 0; r < (with_res ? mrows : 0); r++)
      for (int w = 0; w < ROW / P_VU; w++) begin
        logic [P_VU*16-1:0] word;
        for (int l = 0; l < P_VU; l++) begin
          res[r][w*P_VU + l] = real_to_fp16((real'($urandom_range(0, 2000)) - 1000.0) / 500.0);
          word[l*16 +: 16] = res[r][w*P_VU + l];
        end
        for (int j = 0; j < R_RATIO; j++) wr(TGT_RES, b, (r * (ROW / P_VU) + w) * R_RATIO + j, word[j*EXT_W +: EXT_W]);
      end
    commit_bank(TGT_X, b);
    commit_bank(TGT_Y, b);
    if (with_res) commit_bank(TGT_RES, b);
    checks++;
    if (!x_full[b] || !y_full[b] || (with_res && !res_full[b])) begin failures++; $display("FAIL commit flags"); end
  endtask

  function automatic int xel(int a, int lane, int e, logic s);
    logic [NX-1:0] v = xw[a][(lane*P_PE + e)*NX +: NX];
    return s ? int'(signed'(v)) : int'(v);
  endfunction

  task automatic run(qmm_pattern_e pat, post_op_e post, logic xs, int mrows, int kc, logic b, logic res_en, logic qs);
    real fv [ROW];
    real fexp [ROW];
    real s, mean, var_, tol;
    int acc, cyc, issue, q, qe, exact;
    logic [EXT_W-1:0] w;
    logic [P_QUAN*16-1:0] fword;
    logic [P_QUAN*NX-1:0] qword;
    fp16_t scale = real_to_fp16(((post == POST_SOFTMAX) ? 0.02 : 0.0625) + real'($urandom_range(0, 100)) / ((post == POST_SOFTMAX) ? 4000.0 : 1000.0));
    fp16_t qb = real_to_fp16((real'($urandom_range(0, 200)) - 100.0) / 400.0);
    fp16_t qia = real_to_fp16((post == POST_SOFTMAX) ? 60.0 : 2.5);
    load(b, mrows, res_en);
    @(negedge clk);
    cmd = '0;
    cmd.pattern = pat; cmd.x_signed = xs; cmd.m_rows = 12'(mrows); cmd.n_groups = 12'(NG); cmd.kch = 12'(kc);
    cmd.x_base = 16'd0; cmd.y_base = 16'd8; cmd.x_bank = b; cmd.y_bank = b;
    cmd.scale = scale; cmd.res_en = res_en; cmd.res_base = '0; cmd.res_bank = b;
    cmd.post_op = post; cmd.eps = 16'h1400; cmd.q_beta = qb; cmd.q_inv_alpha = qia; cmd.q_signed = qs;
    cmd.out_base = '0; cmd.out_bank = b;
    cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    issue = mrows * NG * kc * ((pat == PAT_ACT_ACT) ? NX : 1);
    checks++;
    if (cyc < issue || cyc > issue + 250) begin failures++; $display("FAIL cycles %0d issue %0d", cyc, issue); end
    @(negedge clk);
    checks++;
    if (x_full[b] || y_full[b] || res_full[b] || !out_full[b]) begin failures++; $display("FAIL flags after done"); end
    for (int r = 0; r < mrows; r++) begin
      // reference row
      for (int n = 0; n < ROW; n++) begin
        int g = n / P_DPU, d = n % P_DPU;
        acc = 0;
        for (int k = 0; k < kc; k++)
          for (int e = 0; e < P_PE; e++) begin
            if (pat == PAT_ACT_WEIGHT)
              acc += xel(r*kc + k, 0, e, xs) * (yw[8 + g*kc + k][d*P_PE + e] ? 1 : -1);
            else
              acc += xel(r*kc + k, d, e, xs) * int'(signed'(yw[8 + g*kc + k][(d*P_PE + e)*NX +: NX]));
          end
        fv[n] = fp16_to_real(real_to_fp16(fp16_to_real(real_to_fp16(real'(acc))) * fp16_to_real(scale)));
        if (res_en) fv[n] = fp16_to_real(real_to_fp16(fv[n] + fp16_to_real(res[r][n])));
      end
      exact = (post == POST_NONE || post == POST_RELU);
      if (post == POST_RELU) for (int n = 0; n < ROW; n++) if (fv[n] < 0.0) fv[n] = 0.0;
      if (post == POST_SOFTMAX) begin
        s = 0.0;
        for (int n = 0; n < ROW; n++) begin fexp[n] = $exp(fv[n]); s += fexp[n]; end
        for (int n = 0; n < ROW; n++) fv[n] = fexp[n] / s;
      end
      if (post == POST_LN) begin
        mean = 0.0; var_ = 0.0;
        for (int n = 0; n < ROW; n++) mean += fv[n];
        mean /= ROW;
        for (int n = 0; n < ROW; n++) var_ += (fv[n] - mean) ** 2;
        var_ /= ROW;
        for (int n = 0; n < ROW; n++) fv[n] = (fv[n] - mean) / $sqrt(var_ + fp16_to_real(16'h1400)) * gam[n] + bet[n];
      end
      for (int beat = 0; beat < ROW / P_QUAN; beat++) begin
        int oaddr = r * (ROW / P_QUAN) + beat;
        for (int j = 0; j < F_RATIO; j++) begin rd(TGT_Y, b, oaddr * F_RATIO + j, w); fword[j*EXT_W +: EXT_W] = w; end
        for (int j = 0; j < Q_RATIO; j++) begin rd(TGT_X, b, oaddr * Q_RATIO + j, w); qword[j*EXT_W +: EXT_W] = w; end
        for (int l = 0; l < P_QUAN; l++) begin
          int n = beat * P_QUAN + l;
          real got, s1, s2, fl;
          got = fp16_to_real(fword[l*16 +: 16]);
          tol = exact ? 0.0 : ((post == POST_SOFTMAX) ? 0.03 * rabs(fv[n]) + 0.002 : 0.08 + 0.05 * rabs(fv[n]));
          checks++;
          if (rabs(got - fv[n]) > tol) begin
            failures++;
            if (failures < 12) $display("FAIL post=%0d row %0d col %0d fp got %f exp %f", post, r, n, got, fv[n]);
          end
          s1 = fp16_to_real(real_to_fp16((exact ? fv[n] : got) + fp16_to_real(qb)));
          s2 = fp16_to_real(real_to_fp16(s1 * fp16_to_real(qia)));
          fl = $floor(s2);
          qe = int'(fl);
          if (s2 - fl > 0.5 || (s2 - fl == 0.5 && (qe % 2 != 0))) qe++;
          if (qs) qe = (qe > 7) ? 7 : (qe < -8) ? -8 : qe;
          else qe = (qe > 15) ? 15 : (qe < 0) ? 0 : qe;
          q = qs ? int'(signed'(qword[l*NX +: NX])) : int'(qword[l*NX +: NX]);
          checks++;
          if (q != qe) begin
            failures++;
            if (failures < 12) $display("FAIL post=%0d row %0d col %0d q got %0d exp %0d", post, r, n, q, qe);
          end
        end
      end
    end
    @(negedge clk);
    buf_release = 1; buf_release_target = TGT_X; buf_release_bank = b;
    @(negedge clk);
    buf_release_target = TGT_Y;
    @(negedge clk);
    buf_release = 0;
    checks++;
    if (out_full[b]) begin failures++; $display("FAIL output release"); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // layer-norm parameters: one EXT_W word {beta, gamma} per P_LN columns
    for (int a = 0; a < ROW / P_LN; a++) begin
      logic [EXT_W-1:0] word;
      word = '0;
      for (int l = 0; l < P_LN; l++) begin
        fp16_t g = real_to_fp16(0.5 + real'($urandom_range(0, 1000)) / 1000.0);
        fp16_t bb = real_to_fp16((real'($urandom_range(0, 1000)) - 500.0) / 1000.0);
        gam[a*P_LN + l] = fp16_to_real(g);
        bet[a*P_LN + l] = fp16_to_real(bb);
        word[l*16 +: 16] = g;
        word[(P_LN + l)*16 +: 16] = bb;
      end
      wr(TGT_LN, 0, a, word);
    end
    run(PAT_ACT_WEIGHT, POST_NONE, 1'b1, 2, 2, 1'b0, 1'b0, 1'b1);
    run(PAT_ACT_WEIGHT, POST_LN, 1'b1, 2, 3, 1'b1, 1'b1, 1'b1);
    run(PAT_ACT_ACT, POST_SOFTMAX, 1'b1, 2, 1, 1'b0, 1'b0, 1'b0);
    run(PAT_ACT_ACT, POST_NONE, 1'b0, 2, 2, 1'b1, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
