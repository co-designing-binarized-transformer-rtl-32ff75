// bat_pkg: types, encodings and half-precision (FP16) arithmetic shared by the
// binarized-Transformer accelerator.
//
// The accelerator keeps integer arithmetic inside the quantized matrix
// multiplication (QMM) engines and does every "full precision" step in IEEE
// binary16 (FP16): dequantization, residual add, softmax, layer normalization
// and the first stages of elastic quantization. The functions below are plain
// combinational functions, so every unit that calls them synthesizes to
// ordinary logic.
//
// FP16 conventions of this design (the paper only states that FP16 is used):
//   * subnormal inputs are read as zero and subnormal results flush to zero;
//   * results round to nearest, ties to even;
//   * overflow gives +/-infinity; NaN handling is not modelled.
// exp(), 1/x and 1/sqrt(x) are this design's own approximations (see each
// function); the paper names the operations but not how they are computed.
package bat_pkg;

  typedef logic [15:0] fp16_t;

  // Decoded value of a bit of the y operand (bit decoder LUT output).
  // 1 -> 2'b01, 0 -> 2'b00, -1 -> 2'b11, as listed in the PE description.
  typedef enum logic [1:0] {
    BIT_ZERO = 2'b00,
    BIT_POS  = 2'b01,
    BIT_NEG  = 2'b11
  } ybit_e;

  // Data configuration of the y operand of a PE (Table of operand types).
  typedef enum logic {
    Y_BINARY_WEIGHT = 1'b0,  // 1-bit weight, bit 1 = +1, bit 0 = -1
    Y_SIGNED_ACT    = 1'b1   // N-bit two's complement activation
  } ymode_e;

  // QMM data access pattern.
  typedef enum logic {
    PAT_ACT_WEIGHT = 1'b0,  // activation multicast, weight tile per DPU
    PAT_ACT_ACT    = 1'b1   // both operands unicast per DPU (one head each)
  } qmm_pattern_e;

  // Operation selected after the vector unit in a module.
  typedef enum logic [1:0] {
    POST_NONE    = 2'd0,
    POST_SOFTMAX = 2'd1,  // MHA only
    POST_RELU    = 2'd2,  // FFN only
    POST_LN      = 2'd3
  } post_op_e;

  // DMA descriptor: move `len` EXT_W-bit words between external memory and
  // one on-chip buffer. module_sel selects the module (0 MHA, 1 FFN), target
  // the buffer inside it (see dma_target_e).
  typedef enum logic [1:0] {
    TGT_X   = 2'd0,  // load: activation ping-pong buffer   | store: quantized output
    TGT_Y   = 2'd1,  // load: weight & activation buffer    | store: FP output
    TGT_RES = 2'd2,  // load: residual (FP) buffer
    TGT_LN  = 2'd3   // load: layer-norm gamma/beta
  } dma_target_e;

  typedef struct packed {
    logic        store;     // 0: external -> on-chip, 1: on-chip -> external
    logic        module_sel;
    dma_target_e target;
    logic        bank;
    logic [31:0] ext_addr;  // in EXT_W-bit words
    logic [15:0] buf_addr;  // in EXT_W-bit sub-words of the target buffer
    logic [15:0] len;
    logic        last;      // last transfer of this bank: commit (load) or release (store) it
  } dma_desc_t;

  // Command of an MHA or FFN module: one QMM followed by the row pipeline
  // vector unit -> (softmax | ReLU | layer norm | none) -> quantization.
  typedef struct packed {
    qmm_pattern_e pattern;
    logic         x_signed;
    logic [11:0]  m_rows;
    logic [11:0]  n_groups;
    logic [11:0]  kch;
    logic [15:0]  x_base;
    logic [15:0]  y_base;
    logic         x_bank;
    logic         y_bank;
    fp16_t        scale;      // dequantization scale alpha_x * alpha_y
    logic         res_en;     // add the residual row
    logic [15:0]  res_base;
    logic         res_bank;
    post_op_e     post_op;
    fp16_t        eps;        // layer norm epsilon
    fp16_t        q_beta;     // elastic quantization bias
    fp16_t        q_inv_alpha;// elastic quantization 1/alpha
    logic         q_signed;
    logic [15:0]  out_base;
    logic         out_bank;
  } module_cmd_t;

  localparam fp16_t FP16_ONE = 16'h3C00;
  localparam fp16_t FP16_INF = 16'h7C00;

  // ---------------------------------------------------------------------
  // Pack sign, integer mantissa and power of two into FP16:
  // value = (-1)^s * mant * 2^e, rounded to nearest even.
  function automatic fp16_t fp16_pack(input logic s, input int e, input logic [47:0] mant);
    int p;
    int ex;
    logic [47:0] m;
    logic [47:0] rem;
    logic [47:0] half;
    logic [11:0] q;
    p = -1;
    for (int i = 0; i < 48; i++) if (mant[i]) p = i;
    if (p < 0) return {s, 15'd0};
    ex = e + p + 15;
    if (p > 10) begin
      m    = mant >> (p - 10);
      rem  = mant & ((48'd1 << (p - 10)) - 48'd1);
      half = 48'd1 << (p - 11);
      q    = m[11:0];
      if (rem > half || (rem == half && q[0])) q = q + 12'd1;
      if (q[11]) begin
        q  = q >> 1;
        ex = ex + 1;
      end
    end else begin
      m = mant << (10 - p);
      q = m[11:0];
    end
    if (ex >= 31) return {s, 15'h7C00};
    if (ex <= 0) return {s, 15'd0};
    return {s, ex[4:0], q[9:0]};
  endfunction

  // Integer mantissa (with hidden one) and exponent so that value = mant*2^exp.
  function automatic logic [10:0] fp16_mant(input fp16_t a);
    return (a[14:10] == 5'd0) ? 11'd0 : {1'b1, a[9:0]};
  endfunction

  function automatic int fp16_exp2(input fp16_t a);
    return int'(a[14:10]) - 25;
  endfunction

  function automatic fp16_t fp16_mul(input fp16_t a, input fp16_t b);
    logic [47:0] m;
    m = 48'(fp16_mant(a)) * 48'(fp16_mant(b));
    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F) return {a[15] ^ b[15], 15'h7C00};
    return fp16_pack(a[15] ^ b[15], fp16_exp2(a) + fp16_exp2(b), m);
  endfunction

  function automatic fp16_t fp16_add(input fp16_t a, input fp16_t b);
    int ea, eb, d, e;
    logic signed [48:0] ma, mb, sum;
    logic [47:0] sh;
    logic sticky;
    if (a[14:10] == 5'h1F) return a;
    if (b[14:10] == 5'h1F) return b;
    ea = fp16_exp2(a);
    eb = fp16_exp2(b);
    if (fp16_mant(a) == 0) return (fp16_mant(b) == 0) ? {a[15] & b[15], 15'd0} : b;
    if (fp16_mant(b) == 0) return a;
    // Align both mantissas 24 bits up so that shifted-out bits survive.
    e  = (ea > eb) ? ea - 24 : eb - 24;
    d  = (ea > eb) ? ea - eb : eb - ea;
    ma = 49'(fp16_mant(a)) << 24;
    mb = 49'(fp16_mant(b)) << 24;
    if (ea > eb) begin
      sh = (d > 40) ? 48'd0 : 48'(mb) >> d;
      sticky = (d > 40) ? 1'b1 : ((48'(mb) & ((48'd1 << d) - 48'd1)) != 0);
      mb = 49'({sh[47:1], sh[0] | sticky});
    end else if (eb > ea) begin
      sh = (d > 40) ? 48'd0 : 48'(ma) >> d;
      sticky = (d > 40) ? 1'b1 : ((48'(ma) & ((48'd1 << d) - 48'd1)) != 0);
      ma = 49'({sh[47:1], sh[0] | sticky});
    end
    if (a[15]) ma = -ma;
    if (b[15]) mb = -mb;
    sum = ma + mb;
    if (sum == 0) return 16'h0000;
    if (sum < 0) return fp16_pack(1'b1, e, 48'(-sum));
    return fp16_pack(1'b0, e, 48'(sum));
  endfunction

  function automatic fp16_t fp16_sub(input fp16_t a, input fp16_t b);
    return fp16_add(a, {~b[15], b[14:0]});
  endfunction

  function automatic fp16_t fp16_from_int(input logic signed [31:0] v);
    logic [47:0] m;
    m = (v < 0) ? 48'(-64'(v)) : 48'(v);
    return fp16_pack(v < 0, 0, m);
  endfunction

  // FP16 to 16-bit signed integer, round to nearest even, saturating.
  function automatic logic signed [15:0] fp16_to_int16(input fp16_t a);
    int e;
    logic [47:0] m, q, rem, half;
    logic [47:0] mag;
    e = fp16_exp2(a);
    m = 48'(fp16_mant(a));
    if (a[14:10] == 5'h1F) mag = 48'hFFFF_FFFF;
    else if (e >= 0) mag = (e > 20) ? 48'hFFFF_FFFF : (m << e);
    else if (e < -12) mag = 48'd0;
    else begin
      q    = m >> (-e);
      rem  = m & ((48'd1 << (-e)) - 48'd1);
      half = 48'd1 << (-e - 1);
      mag  = q + ((rem > half || (rem == half && q[0])) ? 48'd1 : 48'd0);
    end
    if (a[15]) return (mag > 48'd32768) ? -16'sd32768 : 16'(-mag);
    return (mag > 48'd32767) ? 16'sd32767 : 16'(mag);
  endfunction

  // 1/a: integer division of 2^31 by the 11-bit mantissa (about 20 quotient
  // bits), then one rounding to FP16.
  function automatic fp16_t fp16_recip(input fp16_t a);
    logic [47:0] q;
    if (fp16_mant(a) == 0) return {a[15], 15'h7C00};
    if (a[14:10] == 5'h1F) return {a[15], 15'd0};
    q = 48'h8000_0000 / 48'(fp16_mant(a));
    return fp16_pack(a[15], -fp16_exp2(a) - 31, q);
  endfunction

  // Integer square root (digit by digit) of a 40-bit value.
  function automatic logic [19:0] isqrt40(input logic [39:0] v);
    logic [39:0] rem;
    logic [19:0] root;
    logic [21:0] trial;
    rem  = '0;
    root = '0;
    for (int i = 19; i >= 0; i--) begin
      rem   = {rem[37:0], v[2*i+1], v[2*i]};
      trial = {root, 2'b01};
      if (40'(trial) <= rem) begin
        rem  = rem - 40'(trial);
        root = {root[18:0], 1'b1};
      end else begin
        root = {root[18:0], 1'b0};
      end
    end
    return root;
  endfunction

  // 1/sqrt(a) for a > 0: make the exponent even, take sqrt(mant * 2^20)
  // with the integer square root, divide 2^40 by it.
  function automatic fp16_t fp16_rsqrt(input fp16_t a);
    int e;
    logic [39:0] m;
    logic [19:0] s;
    logic [47:0] r;
    if (fp16_mant(a) == 0) return FP16_INF;
    e = fp16_exp2(a);
    m = 40'(fp16_mant(a)) << 20;
    if (e % 2 != 0) begin
      m = m << 1;
      e = e - 1;
    end
    s = isqrt40(m);
    r = 48'h100_0000_0000 / 48'(s);
    return fp16_pack(1'b0, -(e / 2) - 30, r);
  endfunction

  // exp(a) = 2^(a*log2(e)). a is taken to signed fixed point with 16
  // fraction bits, clamped to [-17, 11.08]; 2^f for the fraction f uses
  // 1 + f*(0.6565 + 0.3435*f) (relative error below 0.3 %).
  function automatic fp16_t fp16_exp(input fp16_t a);
    int e;
    logic signed [47:0] xf;
    logic signed [63:0] t;
    logic signed [31:0] n;
    logic [15:0] f;
    logic [31:0] poly;
    e = fp16_exp2(a);
    if (fp16_mant(a) == 0) return FP16_ONE;
    if (e + 16 >= 0) xf = (e + 16 > 20) ? 48'sh7FFF_FFFF : 48'(fp16_mant(a)) << (e + 16);
    else xf = (e + 16 < -12) ? 48'sd0 : 48'(fp16_mant(a)) >> (-(e + 16));
    if (a[15]) xf = -xf;
    if (xf > 48'sd726_000) xf = 48'sd726_000;      // 11.08
    if (xf < -48'sd1_114_112) xf = -48'sd1_114_112;  // -17
    t = (64'(xf) * 64'sd47274) >>> 15;  // * log2(e), Q.16
    n = 32'(t >>> 16);
    f = t[15:0];
    poly = 32'd65536 + ((32'(f) * (32'd43026 + ((32'd22510 * 32'(f)) >> 16))) >> 16);
    return fp16_pack(1'b0, int'(n) - 16, 48'(poly));
  endfunction

endpackage
