// hilos_pkg: types, constants and floating-point arithmetic shared by the
// near-storage attention accelerator.
//
// The accelerator keeps every tensor in off-chip DRAM as IEEE half precision
// (FP16) and does all arithmetic (products, accumulations, exponentials,
// division) in IEEE single precision (FP32), as the design calls for. The
// functions below are plain combinational FP32 operators written for this RTL:
//   * FP32 denormal inputs and results are flushed to zero (FP16 subnormals,
//     however, are converted exactly, see below),
//   * results are truncated (round toward zero), except FP32->FP16 which
//     rounds to nearest,
//   * overflow saturates to infinity; NaN is not produced or propagated.
// These simplifications are this design's own choice; they are harmless for
// softmax/attention where all exponent arguments are <= 0 and the padding
// value is -1e4.
//
// DRAM is addressed in 512-bit words (32 FP16 elements), matching a 512-bit
// AXI4 data path. All units share HEAD_DIM = 128 and a block of 128 tokens.
package hilos_pkg;

  typedef logic [15:0] fp16_t;
  typedef logic [31:0] fp32_t;

  localparam int unsigned MEM_DW   = 512;            // DRAM data width (bits)
  localparam int unsigned MEM_AW   = 26;             // 4 GiB / 64 B words
  localparam int unsigned ELEMS_PER_WORD = MEM_DW / 16;  // 32 FP16 per word
  localparam int unsigned LEN_W    = 20;             // token counters, up to 1M tokens

  typedef logic [MEM_AW-1:0] maddr_t;
  typedef logic [MEM_DW-1:0] mword_t;
  typedef logic [LEN_W-1:0]  len_t;

  localparam fp32_t FP32_ZERO     = 32'h0000_0000;
  localparam fp32_t FP32_ONE      = 32'h3F80_0000;
  localparam fp32_t FP32_NEG_INF  = 32'hFF80_0000;
  localparam fp32_t FP32_POS_INF  = 32'h7F80_0000;
  localparam fp32_t FP32_MASK_VAL = 32'hC61C_4000;   // -1.0e4, padding value
  localparam fp32_t FP32_INV_SQRT128 = 32'h3DB5_04F3; // 1/sqrt(128)

  // One attention job: one KV head, DGROUP query heads sharing it.
  typedef struct packed {
    maddr_t q_addr;      // DGROUP rows of 128 FP16 (4 words per row)
    maddr_t k_addr;      // key rows, token-major, 4 words per token
    maddr_t v_addr;      // value rows, token-major, 4 words per token
    maddr_t qk_addr;     // QK^T scores, per query row of NB*128 FP16
    maddr_t sc_addr;     // softmax attention scores, same layout as qk
    maddr_t out_addr;    // DGROUP rows of 128 FP16 attention results
    len_t   stored_len;  // tokens whose K is in DRAM (QK computed on chip)
    len_t   valid_len;   // stored + host-buffered tokens; rest is padding
  } attn_job_t;

  // ------------------------------------------------------------------
  // Format conversion
  // ------------------------------------------------------------------
  // FP16 subnormals are kept in both directions: attention probabilities of
  // long sequences are mostly below the smallest normal FP16 (6.1e-5).
  function automatic fp32_t fp16_to_fp32(fp16_t h);
    logic [4:0] e;
    int         p;
    logic [9:0] m;
    e = h[14:10];
    if (e == 5'd0) begin
      if (h[9:0] == 10'd0) return {h[15], 31'b0};
      // normalise: shift left until the leading one leaves the 10-bit field
      m = h[9:0];
      p = 0;
      if (m[9:2] == 8'd0) begin m = m << 8; p = p + 8; end
      if (m[9:6] == 4'd0) begin m = m << 4; p = p + 4; end
      if (m[9:8] == 2'd0) begin m = m << 2; p = p + 2; end
      if (m[9]   == 1'b0) begin m = m << 1; p = p + 1; end
      m = m << 1;                                   // drop the leading one
      return {h[15], 8'(112 - p), m, 13'b0};
    end
    else if (e == 5'h1F) return {h[15], 8'hFF, h[9:0], 13'b0};
    else                 return {h[15], 8'(e) + 8'd112, h[9:0], 13'b0};
  endfunction

  function automatic fp16_t fp32_to_fp16(fp32_t f);
    int e, sh;
    logic [15:0] r;
    logic [24:0] mt;
    e = int'(f[30:23]) - 112;
    if (f[30:23] == 8'd0) return {f[31], 15'b0};
    if (e <= 0) begin                      // FP16 subnormal range
      sh = 14 - e;                         // value = {1,m} >> sh in units of 2^-24
      if (sh > 24) return {f[31], 15'b0};
      mt = {1'b1, f[22:0], 1'b0} >> sh;    // one extra bit for rounding
      r  = 16'(mt[24:1]) + 16'(mt[0]);
      return {f[31], r[14:0]};
    end
    if (e >= 31) return {f[31], 5'h1F, 10'b0};
    r = {1'b0, 5'(e), f[22:13]} + 16'(f[12]);   // round to nearest
    if (r[14:10] == 5'h1F) return {f[31], 5'h1F, 10'b0};
    return {f[31], r[14:0]};
  endfunction

  // ------------------------------------------------------------------
  // Comparison and max (sign-magnitude ordering)
  // ------------------------------------------------------------------
  function automatic logic [31:0] fp32_key(fp32_t a);
    return a[31] ? ~a : (a | 32'h8000_0000);
  endfunction

  function automatic logic fp32_gt(fp32_t a, fp32_t b);
    return fp32_key(a) > fp32_key(b);
  endfunction

  function automatic fp32_t fp32_max(fp32_t a, fp32_t b);
    return fp32_gt(b, a) ? b : a;
  endfunction

  // ------------------------------------------------------------------
  // Multiply
  // ------------------------------------------------------------------
  function automatic fp32_t fp32_mul(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] p;
    int          e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'b0};
    if (a[30:23] == 8'hFF || b[30:23] == 8'hFF) return {s, 8'hFF, 23'b0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = int'(a[30:23]) + int'(b[30:23]) - 127;
    if (p[47]) begin m = p[46:24]; e = e + 1; end
    else       m = p[45:23];
    if (e <= 0)   return {s, 31'b0};
    if (e >= 255) return {s, 8'hFF, 23'b0};
    return {s, 8'(e), m};
  endfunction

  // ------------------------------------------------------------------
  // Add
  // ------------------------------------------------------------------
  function automatic fp32_t fp32_add(fp32_t a, fp32_t b);
    fp32_t       x, y;
    int          d, e, lz;
    logic [27:0] mx, my, sum;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? FP32_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:23] == 8'hFF) return a;
    if (b[30:23] == 8'hFF) return b;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else                    begin x = b; y = a; end
    d  = int'(x[30:23]) - int'(y[30:23]);
    e  = int'(x[30:23]);
    mx = {1'b0, 1'b1, x[22:0], 3'b0};
    my = (d > 26) ? 28'd0 : ({1'b0, 1'b1, y[22:0], 3'b0} >> d);
    if (x[31] == y[31]) begin
      sum = mx + my;
      if (sum[27]) begin sum = sum >> 1; e = e + 1; end
    end else begin
      sum = mx - my;
      if (sum == 28'd0) return FP32_ZERO;
      // normalise so that the leading one sits at bit 26 (binary search)
      lz = 0;
      if (sum[26:11] == 16'd0) begin sum = sum << 16; lz = lz + 16; end
      if (sum[26:19] == 8'd0)  begin sum = sum << 8;  lz = lz + 8;  end
      if (sum[26:23] == 4'd0)  begin sum = sum << 4;  lz = lz + 4;  end
      if (sum[26:25] == 2'd0)  begin sum = sum << 2;  lz = lz + 2;  end
      if (sum[26]    == 1'b0)  begin sum = sum << 1;  lz = lz + 1;  end
      e = e - lz;
    end
    if (e <= 0)   return {x[31], 31'b0};
    if (e >= 255) return {x[31], 8'hFF, 23'b0};
    return {x[31], 8'(e), sum[25:3]};
  endfunction

  function automatic fp32_t fp32_sub(fp32_t a, fp32_t b);
    return fp32_add(a, {~b[31], b[30:0]});
  endfunction

  // ------------------------------------------------------------------
  // Divide: mantissa quotient by integer division
  // ------------------------------------------------------------------
  function automatic fp32_t fp32_div(fp32_t a, fp32_t b);
    logic        s;
    logic [47:0] q;
    int          e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0) return {s, 31'b0};
    if (b[30:23] == 8'd0 || a[30:23] == 8'hFF) return {s, 8'hFF, 23'b0};
    if (b[30:23] == 8'hFF) return {s, 31'b0};
    q = {1'b1, a[22:0], 24'b0} / {24'b0, 1'b1, b[22:0]};
    e = int'(a[30:23]) - int'(b[30:23]) + 127;
    if (q[24]) m = q[23:1];
    else begin m = q[22:0]; e = e - 1; end
    if (e <= 0)   return {s, 31'b0};
    if (e >= 255) return {s, 8'hFF, 23'b0};
    return {s, 8'(e), m};
  endfunction

  // ------------------------------------------------------------------
  // Exponential.
  // exp(x) = 2^(x*log2 e) = 2^n * 2^(k/16) * 2^(r), with n integer,
  // k the top 4 fraction bits (16-entry table) and r < 1/16 evaluated by a
  // cubic Taylor series of e^(r*ln2). Fixed point is Q8.24 for the
  // argument and Q2.30 for the mantissa. Relative error is below 1e-6
  // before the final truncation.
  // ------------------------------------------------------------------
  localparam logic [31:0] EXP2_LUT [16] = '{
    32'h40000000, 32'h42D561B4, 32'h45CAE0F2, 32'h48E1E9BA,
    32'h4C1BF829, 32'h4F7A9930, 32'h52FF6B55, 32'h56AC1F75,
    32'h5A82799A, 32'h5E8451D0, 32'h62B39509, 32'h6712460B,
    32'h6BA27E65, 32'h70666F76, 32'h75606374, 32'h7A92BE8B};
  localparam logic [31:0] LOG2E_Q30 = 32'h5C551D95;
  localparam logic [31:0] LN2_Q30   = 32'h2C5C85FE;

  function automatic fp32_t fp32_exp(fp32_t x);
    int           sh, n, e;
    logic [31:0]  fx;        // |x| in Q8.24
    logic [63:0]  prod;
    logic signed [39:0] y;   // x*log2e in Q.24, signed
    logic [23:0]  f;
    logic [19:0]  r;
    logic [63:0]  t, t2, t3, p, res;
    logic [3:0]   k;
    if (x[30:23] == 8'd0) return FP32_ONE;
    if (x[30:23] >= 8'd134) return x[31] ? FP32_ZERO : FP32_POS_INF;  // |x| >= 128
    sh = int'(x[30:23]) - 126;
    if (sh >= 0) fx = {8'b0, 1'b1, x[22:0]} << sh;
    else if (sh < -24) fx = 32'd0;
    else fx = {8'b0, 1'b1, x[22:0]} >> (-sh);
    prod = 64'(fx) * 64'(LOG2E_Q30);          // Q.54
    y    = 40'(prod >> 30);                   // Q.24
    if (x[31]) y = -y;
    n  = int'(y >>> 24);
    f  = y[23:0];
    k  = f[23:20];
    r  = f[19:0];
    t  = (64'(r) << 6) * 64'(LN2_Q30) >> 30;  // r*ln2 in Q.30
    t2 = (t * t) >> 30;
    t3 = (t2 * t) >> 30;
    p  = 64'h4000_0000 + t + (t2 >> 1) + ((t3 * 64'h2AAA_AAAB) >> 32);
    res = (64'(EXP2_LUT[k]) * p) >> 30;       // Q2.30 in [1,2]
    e = n + 127;
    if (res[31]) begin res = res >> 1; e = e + 1; end
    if (e <= 0)   return FP32_ZERO;
    if (e >= 255) return FP32_POS_INF;
    return {1'b0, 8'(e), res[29:7]};
  endfunction

endpackage
