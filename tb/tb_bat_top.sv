// tb_bat_top: end-to-end run of bat_top at reduced size (P_PE 32, P_DPU 4, rows of 32).
//
// A host process drives the DMA descriptor port and both command ports; an
// external memory model (random grant, read data two cycles after the grant,
// in order) holds all tensors. The sequence is the piece of an encoder
// layer that exercises every path of the accelerator:
//   A  MHA, bank 0: activation x binary weight, dequantize, residual add,
//      layer norm, signed 4-bit quantization (output projection + LN).
//   B  MHA, bank 1: activation x activation (Q.K^T, per-DPU operands),
//      softmax, unsigned quantization. B's operands are loaded while A
//      runs (ping-pong overlap).
//   C  FFN, bank 0: A's quantized output, stored to external memory and
//      loaded back, times a binary weight, ReLU, unsigned quantization.
//      C starts while B still runs (MHA and FFN modules concurrent).
// All outputs (quantized and FP16) are stored back through the DMA and
// compared with a reference computed here from the external memory image:
// quantized values of exact paths bit for bit, after softmax or layer norm
// within one step, FP16 values exactly or within a tolerance.
// The testbench counts how often each mechanism happens (module overlap,
// DMA into a busy module, pattern b, softmax, layer norm, ReLU clamping,
// residual add, clip saturation, module chaining) and fails any that never
// happened, plus a check that the MHA and FFN were busy at the same time.
module tb_bat_top;
  import bat_pkg::*;
  import fp16_ref_pkg::*;
  localparam int NX = 4, P_PE = 32, P_DPU = 4, ACC_W = 24, P_VU_MHA = 8, P_VU_FFN = 8, P_LN = 4;
  localparam int P_SM = 2, P_QUAN = 32, D_HID = 32, D_INTER = 32, EXT_W = 128;
  localparam int NG_A = 8, KC_A = 1, MA = 2, NG_B = 8, KC_B = 1, MB = 8, NG_C = 8, KC_C = 1;
  localparam int XW_M = P_DPU * P_PE * NX, YW_M = P_DPU * P_PE * NX;
  localparam int XW_F = P_PE * NX, YW_F = P_DPU * P_PE;
  localparam int Q_RATIO = P_QUAN * NX / EXT_W, F_RATIO = P_QUAN * 16 / EXT_W;
  localparam int RW_A = NG_A * P_DPU, RW_B = NG_B * P_DPU, RW_C = NG_C * P_DPU;
  // external memory regions (word addresses)
  localparam int XA = 32'h0000, YA = 32'h1000, RA = 32'h2000, LNA = 32'h3000;
  localparam int XB = 32'h4000, YB = 32'h5000, YC = 32'h6000;
  localparam int QA = 32'h7000, FA = 32'h8000, QB = 32'h9000, FB = 32'hA000;
  localparam int QC = 32'hB000, FC = 32'hC000;

  logic clk = 0, rst_n = 0;
  logic dma_desc_valid = 0, dma_desc_ready, dma_done;
  dma_desc_t dma_desc = '0;
  logic mha_cmd_valid = 0, mha_busy, mha_done, ffn_cmd_valid = 0, ffn_busy, ffn_done;
  module_cmd_t mha_cmd = '0, ffn_cmd = '0;
  logic [1:0][3:0][1:0] bank_full;
  logic mem_req, mem_gnt, mem_we, mem_rvalid;
  logic [31:0] mem_addr;
  logic [EXT_W-1:0] mem_wdata, mem_rdata;
  int checks = 0, failures = 0;

  bat_top #(.NX(NX), .P_PE(P_PE), .P_DPU(P_DPU), .ACC_W(ACC_W), .P_VU_MHA(P_VU_MHA), .P_VU_FFN(P_VU_FFN),
    .P_LN(P_LN), .P_SM(P_SM), .P_QUAN(P_QUAN), .D_HID(D_HID), .D_INTER(D_INTER), .EXT_W(EXT_W),
    .X_DEPTH(32), .Y_DEPTH_MHA(32), .Y_DEPTH_FFN(32), .RES_DEPTH(16), .OUT_DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- external memory model ----------------
  logic [EXT_W-1:0] ext [int];
  logic [1:0] rv_pipe = '0;
  logic [EXT_W-1:0] rd_pipe [2];
  logic gnt_rand;
  always_ff @(posedge clk) gnt_rand <= ($urandom_range(0, 3) != 0);
  assign mem_gnt = mem_req && gnt_rand;
  always_ff @(posedge clk) begin
    rv_pipe <= {rv_pipe[0], mem_req && mem_gnt && !mem_we};
    rd_pipe[1] <= rd_pipe[0];
    if (mem_req && mem_gnt && !mem_we) rd_pipe[0] <= ext.exists(int'(mem_addr)) ? ext[int'(mem_addr)] : '0;
    if (mem_req && mem_gnt && mem_we) ext[int'(mem_addr)] = mem_wdata;
  end
  assign mem_rvalid = rv_pipe[1];
  assign mem_rdata  = rd_pipe[1];

  // ---------------- mechanism counters ----------------
  int n_concurrent = 0, n_dma_into_busy = 0, n_pattern_b = 0, n_softmax = 0, n_ln = 0;
  int n_relu_clamp = 0, n_residual = 0, n_clip_sat = 0, n_chain = 0;
  always_ff @(posedge clk) begin
    if (mha_busy && ffn_busy) n_concurrent++;
    if (dut.wr_en && !dut.sel.module_sel && mha_busy) n_dma_into_busy++;
    if (dut.wr_en && dut.sel.module_sel && ffn_busy) n_dma_into_busy++;
  end

  // ---------------- host helpers ----------------
  task automatic dma(logic st, logic msel, dma_target_e tgt, logic bank, int ea, int len, logic last);
    @(negedge clk);
    dma_desc = '0;
    dma_desc.store = st; dma_desc.module_sel = msel; dma_desc.target = tgt; dma_desc.bank = bank;
    dma_desc.ext_addr = 32'(ea); dma_desc.buf_addr = '0; dma_desc.len = 16'(len); dma_desc.last = last;
    dma_desc_valid = 1;
    @(posedge clk);
    while (!dma_desc_ready) @(posedge clk);
    @(negedge clk);
    dma_desc_valid = 0;
    while (!dma_done) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic fill_rand(int base, int n);
    for (int i = 0; i < n; i++) begin
      logic [EXT_W-1:0] w;
      for (int j = 0; j < EXT_W / 32; j++) w[j*32 +: 32] = $urandom;
      ext[base + i] = w;
    end
  endtask

  function automatic logic [EXT_W-1:0] rdx(int a);
    return ext.exists(a) ? ext[a] : '0;
  endfunction
  // bit field of a buffer word made of `ratio` external words
  function automatic int field(int base, int ratio, int a, int pos, int w, logic sgn);
    logic [31:0] v = '0;
    for (int i = 0; i < w; i++) begin
      int p = pos + i;
      logic [EXT_W-1:0] word = rdx(base + a * ratio + p / EXT_W);
      v[i] = word[p % EXT_W];
    end
    if (sgn && v[w-1]) return int'(v) - (1 << w);
    return int'(v);
  endfunction

  task automatic issue(logic is_ffn, module_cmd_t c);
    @(negedge clk);
    if (is_ffn) begin ffn_cmd = c; ffn_cmd_valid = 1; end
    else begin mha_cmd = c; mha_cmd_valid = 1; end
    @(negedge clk);
    ffn_cmd_valid = 0; mha_cmd_valid = 0;
  endtask

  // reference of one command, compared with what was stored at qa/fa
  task automatic check_cmd(logic is_ffn, module_cmd_t c, int xa, int ya, int ra, int qa, int fa);
    int xr = is_ffn ? XW_F / EXT_W : XW_M / EXT_W;
    int yr = is_ffn ? YW_F / EXT_W : YW_M / EXT_W;
    int pvu = is_ffn ? P_VU_FFN : P_VU_MHA;
    int ng = int'(c.n_groups), kc = int'(c.kch), row = ng * P_DPU;
    real fv [];
    real ex [];
    real s, mean, var_, tol, got, s1, s2, fl;
    int acc, q, qe, exact, neg;
    fv = new[row];
    ex = new[row];
    for (int r = 0; r < int'(c.m_rows); r++) begin
      neg = 0;
      for (int n = 0; n < row; n++) begin
        int g = n / P_DPU, d = n % P_DPU;
        acc = 0;
        for (int k = 0; k < kc; k++)
          for (int e = 0; e < P_PE; e++) begin
            if (c.pattern == PAT_ACT_WEIGHT)
              acc += field(xa, xr, r*kc + k, e*NX, NX, c.x_signed) *
                     (field(ya, yr, g*kc + k, d*P_PE + e, 1, 1'b0) != 0 ? 1 : -1);
            else
              acc += field(xa, xr, r*kc + k, (d*P_PE + e)*NX, NX, c.x_signed) *
                     field(ya, yr, g*kc + k, (d*P_PE + e)*NX, NX, 1'b1);
          end
        fv[n] = fp16_to_real(real_to_fp16(fp16_to_real(real_to_fp16(real'(acc))) * fp16_to_real(c.scale)));
        if (c.res_en) begin
          int ridx = (r * row + n);
          fv[n] = fp16_to_real(real_to_fp16(fv[n] + fp16_to_real(16'(field(ra, 1, 0, ridx * 16, 16, 1'b0)))));
        end
      end
      exact = (c.post_op == POST_NONE || c.post_op == POST_RELU);
      if (c.post_op == POST_RELU) for (int n = 0; n < row; n++) if (fv[n] < 0.0) begin fv[n] = 0.0; neg++; end
      if (neg > 0) n_relu_clamp++;
      if (c.post_op == POST_SOFTMAX) begin
        s = 0.0;
        for (int n = 0; n < row; n++) begin ex[n] = $exp(fv[n]); s += ex[n]; end
        for (int n = 0; n < row; n++) fv[n] = ex[n] / s;
        n_softmax++;
      end
      if (c.post_op == POST_LN) begin
        mean = 0.0; var_ = 0.0;
        for (int n = 0; n < row; n++) mean += fv[n];
        mean /= row;
        for (int n = 0; n < row; n++) var_ += (fv[n] - mean) ** 2;
        var_ /= row;
        for (int n = 0; n < row; n++) begin
          real gm = fp16_to_real(16'(field(LNA, 1, n / P_LN, (n % P_LN) * 16, 16, 1'b0)));
          real bt = fp16_to_real(16'(field(LNA, 1, n / P_LN, (P_LN + n % P_LN) * 16, 16, 1'b0)));
          fv[n] = (fv[n] - mean) / $sqrt(var_ + fp16_to_real(c.eps)) * gm + bt;
        end
        n_ln++;
      end
      if (c.res_en) n_residual++;
      if (c.pattern == PAT_ACT_ACT) n_pattern_b++;
      for (int n = 0; n < row; n++) begin
        int o = r * (row / P_QUAN) + n / P_QUAN, l = n % P_QUAN;
        got = fp16_to_real(16'(field(fa, F_RATIO, o, l * 16, 16, 1'b0)));
        tol = exact ? 0.0 : ((c.post_op == POST_SOFTMAX) ? 0.03 * rabs(fv[n]) + 0.002 : 0.08 + 0.05 * rabs(fv[n]));
        checks++;
        if (rabs(got - fv[n]) > tol) begin
          failures++;
          if (failures < 12) $display("FAIL %s row %0d col %0d fp got %f exp %f", is_ffn ? "ffn" : "mha", r, n, got, fv[n]);
        end
        s1 = fp16_to_real(real_to_fp16((exact ? fv[n] : got) + fp16_to_real(c.q_beta)));
        s2 = fp16_to_real(real_to_fp16(s1 * fp16_to_real(c.q_inv_alpha)));
        fl = $floor(s2);
        qe = int'(fl);
        if (s2 - fl > 0.5 || (s2 - fl == 0.5 && (qe % 2 != 0))) qe++;
        if (c.q_signed ? (qe > 7 || qe < -8) : (qe > 15 || qe < 0)) n_clip_sat++;
        if (c.q_signed) qe = (qe > 7) ? 7 : (qe < -8) ? -8 : qe;
        else qe = (qe > 15) ? 15 : (qe < 0) ? 0 : qe;
        q = field(qa, Q_RATIO, o, l * NX, NX, c.q_signed);
        checks++;
        if (q != qe) begin
          failures++;
          if (failures < 12) $display("FAIL %s row %0d col %0d q got %0d exp %0d", is_ffn ? "ffn" : "mha", r, n, q, qe);
        end
      end
    end
  endtask

  function automatic module_cmd_t mk(qmm_pattern_e pat, logic xs, int m, int ng, int kc, logic bank,
                                     logic res_en, post_op_e post, real scale, real qb, real qia, logic qs);
    module_cmd_t c = '0;
    c.pattern = pat; c.x_signed = xs; c.m_rows = 12'(m); c.n_groups = 12'(ng); c.kch = 12'(kc);
    c.x_bank = bank; c.y_bank = bank; c.res_bank = bank; c.out_bank = bank; c.res_en = res_en;
    c.scale = real_to_fp16(scale); c.post_op = post; c.eps = 16'h1400;
    c.q_beta = real_to_fp16(qb); c.q_inv_alpha = real_to_fp16(qia); c.q_signed = qs;
    return c;
  endfunction

  initial begin
    module_cmd_t ca, cb, cc;
    int cyc;
    ca = mk(PAT_ACT_WEIGHT, 1'b0, MA, NG_A, KC_A, 1'b0, 1'b1, POST_LN, 2.0 / real'(KC_A * P_PE), 0.05, 2.5, 1'b1);
    cb = mk(PAT_ACT_ACT, 1'b1, MB, NG_B, KC_B, 1'b1, 1'b0, POST_SOFTMAX, 1.0 / (12.0 * $sqrt(real'(KC_B * P_PE))), 0.0, 60.0, 1'b0);
    cc = mk(PAT_ACT_WEIGHT, 1'b1, MA, NG_C, KC_C, 1'b0, 1'b0, POST_RELU, 0.25 / $sqrt(real'(KC_C * P_PE)), -0.1, 3.0, 1'b0);
    // operands
    fill_rand(XA, MA * KC_A * XW_M / EXT_W);
    fill_rand(YA, NG_A * KC_A * YW_M / EXT_W);
    fill_rand(XB, MB * KC_B * XW_M / EXT_W);
    fill_rand(YB, NG_B * KC_B * YW_M / EXT_W);
    fill_rand(YC, NG_C * KC_C * YW_F / EXT_W);
    for (int i = 0; i < MA * RW_A * 16 / EXT_W; i++) begin
      logic [EXT_W-1:0] w;
      for (int l = 0; l < EXT_W / 16; l++)
        w[l*16 +: 16] = real_to_fp16((real'($urandom_range(0, 2000)) - 1000.0) / 500.0);
      ext[RA + i] = w;
    end
    for (int i = 0; i < D_HID / P_LN; i++) begin
      logic [EXT_W-1:0] w = '0;
      for (int l = 0; l < P_LN; l++) begin
        w[l*16 +: 16] = real_to_fp16(0.5 + real'($urandom_range(0, 1000)) / 1000.0);
        w[(P_LN + l)*16 +: 16] = real_to_fp16((real'($urandom_range(0, 1000)) - 500.0) / 1000.0);
      end
      ext[LNA + i] = w;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // A: load and start
    dma(1'b0, 1'b0, TGT_LN, 1'b0, LNA, D_HID / P_LN, 1'b0);
    dma(1'b0, 1'b0, TGT_X, 1'b0, XA, MA * KC_A * XW_M / EXT_W, 1'b1);
    dma(1'b0, 1'b0, TGT_Y, 1'b0, YA, NG_A * KC_A * YW_M / EXT_W, 1'b1);
    dma(1'b0, 1'b0, TGT_RES, 1'b0, RA, MA * RW_A * 16 / EXT_W, 1'b1);
    issue(1'b0, ca);
    // B's operands into bank 1 while A runs
    dma(1'b0, 1'b0, TGT_X, 1'b1, XB, MB * KC_B * XW_M / EXT_W, 1'b1);
    dma(1'b0, 1'b0, TGT_Y, 1'b1, YB, NG_B * KC_B * YW_M / EXT_W, 1'b1);
    while (mha_busy) @(negedge clk);
    issue(1'b0, cb);
    // A's outputs out, then into the FFN, C starts while B runs
    dma(1'b1, 1'b0, TGT_X, 1'b0, QA, MA * RW_A * NX / EXT_W, 1'b1);
    dma(1'b1, 1'b0, TGT_Y, 1'b0, FA, MA * RW_A * 16 / EXT_W, 1'b1);
    dma(1'b0, 1'b1, TGT_X, 1'b0, QA, MA * RW_A * NX / EXT_W, 1'b1);
    n_chain++;
    dma(1'b0, 1'b1, TGT_Y, 1'b0, YC, NG_C * KC_C * YW_F / EXT_W, 1'b1);
    issue(1'b1, cc);
    checks++;
    if (!mha_busy) begin failures++; $display("FAIL: B finished before C started"); end
    cyc = 0;
    while (mha_busy || ffn_busy) begin @(negedge clk); cyc++; end
    dma(1'b1, 1'b0, TGT_X, 1'b1, QB, MB * RW_B * NX / EXT_W, 1'b1);
    dma(1'b1, 1'b0, TGT_Y, 1'b1, FB, MB * RW_B * 16 / EXT_W, 1'b1);
    dma(1'b1, 1'b1, TGT_X, 1'b0, QC, MA * RW_C * NX / EXT_W, 1'b1);
    dma(1'b1, 1'b1, TGT_Y, 1'b0, FC, MA * RW_C * 16 / EXT_W, 1'b1);
    checks++;
    if (bank_full != '0) begin failures++; $display("FAIL: banks left full %h", bank_full); end

    check_cmd(1'b0, ca, XA, YA, RA, QA, FA);
    check_cmd(1'b0, cb, XB, YB, 0, QB, FB);
    check_cmd(1'b1, cc, QA, YC, 0, QC, FC);

    $display("mechanisms: concurrent=%0d dma_into_busy=%0d pattern_b=%0d softmax=%0d ln=%0d relu_clamp=%0d residual=%0d clip_sat=%0d chain=%0d",
             n_concurrent, n_dma_into_busy, n_pattern_b, n_softmax, n_ln, n_relu_clamp, n_residual, n_clip_sat, n_chain);
    checks++; if (n_concurrent == 0)    begin failures++; $display("FAIL: MHA and FFN never overlapped"); end
    checks++; if (n_dma_into_busy == 0) begin failures++; $display("FAIL: no DMA into a busy module"); end
    checks++; if (n_pattern_b == 0)     begin failures++; $display("FAIL: no pattern-b row"); end
    checks++; if (n_softmax == 0)       begin failures++; $display("FAIL: no softmax row"); end
    checks++; if (n_ln == 0)            begin failures++; $display("FAIL: no layer-norm row"); end
    checks++; if (n_relu_clamp == 0)    begin failures++; $display("FAIL: ReLU never clamped"); end
    checks++; if (n_residual == 0)      begin failures++; $display("FAIL: no residual add"); end
    checks++; if (n_clip_sat == 0)      begin failures++; $display("FAIL: clip never saturated"); end
    checks++; if (n_chain == 0)         begin failures++; $display("FAIL: no chained module"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
