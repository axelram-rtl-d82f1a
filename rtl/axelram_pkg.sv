// axelram_pkg: types, default sizes, FP16 arithmetic and the fixed codebook shared by the
// AXELRAM macro.
//
// Number format. Every datapath value is IEEE-754 binary16 (FP16): sign[15], exponent[14:10]
// with bias 15, fraction[9:0]. The functions below round to nearest, ties to even. To keep the
// arithmetic small they flush subnormal inputs and results to signed zero and saturate overflow
// to infinity; NaN is not produced or distinguished (an all-ones exponent is read as infinity).
// FP16 as the storage and datapath format is the paper's; the flush/saturate rules are this
// design's own choice.
//
// Codebook. The quantizer of a coordinate of a rotated unit vector is the Lloyd-Max quantizer of
// N(0, 1/d). The butterfly network is left unnormalised (it computes H*x, not H*x/sqrt(d)), so
// its outputs follow N(0, 1): the boundaries stored here are the Lloyd-Max boundaries of N(0,1).
// On the read path the 1/sqrt(d) of the query rotation and the 1/sqrt(d) of the N(0,1/d)
// centroids combine into an exact 1/d, which is folded into the stored centroids as an exponent
// shift (d is a power of two). Values are the classic Lloyd-Max levels for a unit Gaussian,
// rounded to FP16; tables exist for b = 2, 3 and 4 bits.
package axelram_pkg;

  typedef logic [15:0] fp16_t;

  // Default sizes: the paper's main configuration.
  localparam int unsigned D_DEF      = 128;   // head dimension d
  localparam int unsigned B_DEF      = 3;     // bits per index b
  localparam int unsigned T_DEF      = 4096;  // keys held (context length T)
  localparam int unsigned LAYERS_DEF = 36;    // sign vectors held (one per layer)

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_INF  = 16'h7c00;

  // Commands accepted by the macro.
  typedef enum logic [1:0] {
    OP_WRITE_KEY = 2'd0,  // quantize a key vector and store it at an address
    OP_QUERY     = 2'd1,  // rotate a query and build the pre-computation table
    OP_SCORE     = 2'd2   // stream attention scores for a range of stored keys
  } op_e;

  // ---------------------------------------------------------------- FP16 helpers
  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;  // zero or subnormal (flushed)
  endfunction

  function automatic logic fp16_is_inf(fp16_t a);
    return a[14:10] == 5'h1f;
  endfunction

  // Round a normalised significand held as {1.f[9:0], guard, sticky} and pack it.
  function automatic fp16_t fp16_pack(logic s, int e, logic [10:0] sig, logic g, logic st);
    logic [11:0] r;
    int ee;
    r  = {1'b0, sig};
    ee = e;
    if (g && (st || sig[0])) r = r + 12'd1;
    if (r[11]) begin
      r  = r >> 1;
      ee = ee + 1;
    end
    if (ee >= 31) return {s, 5'h1f, 10'd0};
    if (ee <= 0) return {s, 15'd0};
    return {s, ee[4:0], r[9:0]};
  endfunction

  // a + b
  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t x, y;
    logic [13:0] mx, my;
    logic [14:0] sum;
    logic [4:0] dexp;
    logic sticky;
    int e;
    if (fp16_is_zero(a) && fp16_is_zero(b)) return {a[15] & b[15], 15'd0};
    if (fp16_is_zero(a)) return b;
    if (fp16_is_zero(b)) return a;
    if (fp16_is_inf(a)) return {a[15], 5'h1f, 10'd0};
    if (fp16_is_inf(b)) return {b[15], 5'h1f, 10'd0};
    // x is the operand of larger magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    dexp = x[14:10] - y[14:10];
    mx   = {1'b1, x[9:0], 3'b000};
    my   = {1'b1, y[9:0], 3'b000};
    if (dexp > 5'd13) begin
      my = 14'd1;  // only the sticky bit survives
    end else begin
      sticky = 1'b0;
      for (int k = 0; k < 14; k++) if (k < int'(dexp) && my[k]) sticky = 1'b1;
      my = (my >> dexp) | {13'd0, sticky};
    end
    if (x[15] == y[15]) sum = {1'b0, mx} + {1'b0, my};
    else sum = {1'b0, mx} - {1'b0, my};
    if (sum == 15'd0) return 16'h0000;
    e = int'(x[14:10]);
    if (sum[14]) begin
      sum = {1'b0, sum[14:2], sum[1] | sum[0]};
      e   = e + 1;
    end else begin
      for (int k = 0; k < 13; k++) begin
        if (!sum[13]) begin
          sum = sum << 1;
          e   = e - 1;
        end
      end
    end
    return fp16_pack(x[15], e, sum[13:3], sum[2], |sum[1:0]);
  endfunction

  // a * b
  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic s;
    logic [21:0] p;
    int e;
    s = a[15] ^ b[15];
    if (fp16_is_zero(a) || fp16_is_zero(b)) return {s, 15'd0};
    if (fp16_is_inf(a) || fp16_is_inf(b)) return {s, 5'h1f, 10'd0};
    p = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    e = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) return fp16_pack(s, e + 1, p[21:11], p[10], |p[9:0]);
    return fp16_pack(s, e, p[20:10], p[9], |p[8:0]);
  endfunction

  // a / b  (b == 0 gives infinity)
  function automatic fp16_t fp16_div(fp16_t a, fp16_t b);
    logic s;
    logic [23:0] num;
    logic [13:0] q;
    logic [10:0] rem;
    int e;
    s = a[15] ^ b[15];
    if (fp16_is_zero(b) || fp16_is_inf(a)) return {s, 5'h1f, 10'd0};
    if (fp16_is_zero(a) || fp16_is_inf(b)) return {s, 15'd0};
    num = {1'b1, a[9:0], 13'd0};
    q   = 14'(num / {13'd0, 1'b1, b[9:0]});
    rem = 11'(num % {13'd0, 1'b1, b[9:0]});
    e   = int'(a[14:10]) - int'(b[14:10]) + 15;
    if (q[13]) return fp16_pack(s, e, q[13:3], q[2], (|q[1:0]) || (rem != 0));
    return fp16_pack(s, e - 1, q[12:2], q[1], q[0] || (rem != 0));
  endfunction

  // sqrt(a) for a >= 0 (a negative operand gives zero)
  function automatic fp16_t fp16_sqrt(fp16_t a);
    logic [31:0] rad, rem, root, trial;
    int ue;
    if (fp16_is_zero(a) || a[15]) return 16'h0000;
    if (fp16_is_inf(a)) return FP16_INF;
    ue = int'(a[14:10]) - 15;
    // radicand = 1.f * 2^30 (or 2^31 for an odd exponent); its root has 16 bits
    if (a[10] == 1'b0) begin  // biased exponent even -> unbiased exponent odd
      rad = {1'b1, a[9:0], 21'd0};
      ue  = ue - 1;
    end else begin
      rad = {1'b0, 1'b1, a[9:0], 20'd0};
    end
    // bit-serial integer square root
    rem  = 32'd0;
    root = 32'd0;
    for (int k = 15; k >= 0; k--) begin
      rem   = (rem << 2) | 32'((rad >> (2 * k)) & 32'd3);
      trial = (root << 2) | 32'd1;
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root << 1) | 32'd1;
      end else begin
        root = root << 1;
      end
    end
    return fp16_pack(1'b0, ue / 2 + 15, root[15:5], root[4], (|root[3:0]) || (rem != 0));
  endfunction

  // a > b as real numbers (the two zeros are equal)
  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    logic [14:0] ma, mb;
    logic sa, sb;
    ma = fp16_is_zero(a) ? 15'd0 : a[14:0];
    mb = fp16_is_zero(b) ? 15'd0 : b[14:0];
    sa = a[15] && (ma != 0);
    sb = b[15] && (mb != 0);
    if (sa != sb) return sb;
    if (!sa) return ma > mb;
    return ma < mb;
  endfunction

  // a * 2^-k, exact unless it underflows (then zero)
  function automatic fp16_t fp16_shr_exp(fp16_t a, int k);
    int e;
    if (fp16_is_zero(a)) return a;
    e = int'(a[14:10]) - k;
    if (e <= 0) return {a[15], 15'd0};
    return {a[15], e[4:0], a[9:0]};
  endfunction

  // ---------------------------------------------------------------- fixed codebook
  // Lloyd-Max boundary k (0 .. 2^b-2) of N(0,1), ascending.
  function automatic fp16_t lm_boundary(int b, int k);
    fp16_t t2[3]  = '{16'hbbda, 16'h0000, 16'h3bda};
    fp16_t t3[7]  = '{16'hbefe, 16'hbc33, 16'hb801, 16'h0000, 16'h3801, 16'h3c33, 16'h3efe};
    fp16_t t4[15] = '{16'hc0cd, 16'hbf60, 16'hbdc0, 16'hbc66, 16'hba65, 16'hb82e, 16'hb422,
                      16'h0000, 16'h3422, 16'h382e, 16'h3a65, 16'h3c66, 16'h3dc0, 16'h3f60,
                      16'h40cd};
    case (b)
      2: return t2[k];
      3: return t3[k];
      default: return t4[k];
    endcase
  endfunction

  // Lloyd-Max centroid j (0 .. 2^b-1) of N(0,1), ascending.
  function automatic fp16_t lm_centroid(int b, int j);
    fp16_t c2[4]  = '{16'hbe0b, 16'hb73f, 16'h373f, 16'h3e0b};
    fp16_t c3[8]  = '{16'hc04e, 16'hbd60, 16'hba0c, 16'hb3d8, 16'h33d8, 16'h3a0c, 16'h3d60,
                      16'h404e};
    fp16_t c4[16] = '{16'hc177, 16'hc023, 16'hbe79, 16'hbd06, 16'hbb8a, 16'hb941, 16'hb635,
                      16'hb01c, 16'h301c, 16'h3635, 16'h3941, 16'h3b8a, 16'h3d06, 16'h3e79,
                      16'h4023, 16'h4177};
    case (b)
      2: return c2[j];
      3: return c3[j];
      default: return c4[j];
    endcase
  endfunction

  // Default ("random seed-derived") sign vector of one layer: bit i set means s_i = -1.
  // A 32-bit xorshift generator seeded with seed and layer supplies one bit per coordinate.
  function automatic logic [1023:0] default_signs(int unsigned seed, int unsigned layer, int d);
    logic [31:0] st;
    logic [1023:0] v;
    v  = '0;
    st = seed ^ (32'h9e3779b9 * (layer + 1));
    if (st == 0) st = 32'h1;
    for (int i = 0; i < 1024; i++) begin
      st = st ^ (st << 13);
      st = st ^ (st >> 17);
      st = st ^ (st << 5);
      if (i < d) v[i] = st[31];
    end
    return v;
  endfunction

endpackage
