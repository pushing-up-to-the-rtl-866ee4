// llm_pkg: types, sizes and FP16 arithmetic shared by the decoder accelerator.
//
// The accelerator runs the decode phase of a LLaMA2-7B class model with 4-bit
// weights (AWQ style, group size 128), FP16 activations and an 8-bit KV cache.
// The sizes below are the ones of that configuration: a 512-bit stream made of
// four 128-bit AXI ports, 128 FP16 lanes in the dot engine, hidden size 4096,
// 32 heads of 128, 32 layers, MLP size 11008, context up to 1024 tokens.
//
// FP16 arithmetic (IEEE binary16 layout) is given as functions so that every
// unit rounds the same way. Choices of this design, not of the original work:
// subnormal inputs and results are flushed to zero, results round to nearest
// even, overflow saturates to infinity, and NaN is not produced or propagated
// (an infinite operand yields infinity).
package llm_pkg;

  typedef logic [15:0] fp16_t;

  // ---- system sizes ----
  localparam int unsigned BUS_W      = 512;   // concatenated stream width
  localparam int unsigned AXI_W      = 128;   // one S_AXI_HP port
  localparam int unsigned N_PORTS    = 4;     // AXI ports used
  localparam int unsigned LANES      = 128;   // FP16 multipliers in the dot engine
  localparam int unsigned W_BITS     = 4;     // weight precision
  localparam int unsigned KV_BITS    = 8;     // KV cache precision
  localparam int unsigned GROUP      = 128;   // quantization group size
  localparam int unsigned HIDDEN     = 4096;
  localparam int unsigned HEADS      = 32;
  localparam int unsigned HEAD_DIM   = 128;
  localparam int unsigned LAYERS     = 32;
  localparam int unsigned FFN        = 11008;
  localparam int unsigned VOCAB      = 32000;
  localparam int unsigned MAX_CTX    = 1024;
  localparam int unsigned SZ_PER_LINE = BUS_W / 32;   // 16 scale-zero packs per line

  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_INF  = 16'h7C00;

  // ---- stream kinds carried by a read command ----
  typedef enum logic [1:0] {
    K_W4   = 2'd0,   // 4-bit weight matrix in the interleaved format
    K_KV8  = 2'd1,   // 8-bit KV cache, blocks of [scale-zero line][16 tokens]
    K_RAW  = 2'd2    // plain FP16 vector (embedding row, norm weights)
  } kind_e;

  // ---- which operation a command feeds (routes the results) ----
  typedef enum logic [3:0] {
    M_EMB = 4'd0, M_LN1 = 4'd1, M_WQ = 4'd2, M_WK = 4'd3, M_KC = 4'd4,
    M_WV  = 4'd5, M_VC  = 4'd6, M_WO = 4'd7, M_LN2 = 4'd8, M_WG = 4'd9,
    M_WU  = 4'd10, M_WD = 4'd11, M_LNF = 4'd12, M_LM = 4'd13
  } mat_e;

  typedef struct packed {
    kind_e       kind;
    mat_e        mat;
    logic [4:0]  layer;
    logic [4:0]  head;
    logic [31:0] addr;     // byte address in the 4 GB DDR space
    logic [22:0] bytes;    // burst length in bytes (DataMover BTT width)
    logic [15:0] rows;     // W4: rows; KV8: tokens; RAW: elements
    logic [15:0] cols;     // W4: columns (multiple of 128)
  } cmd_t;

  // One 512-bit beat handed from the demultiplexer to the dequantizer, with
  // the zero point and scale that belong to it and its place in the GEMV.
  typedef struct packed {
    kind_e        kind;
    mat_e         mat;
    logic [511:0] q;       // 128 x 4-bit weights, or 64 x 8-bit cache values
    logic [7:0]   zp;      // zero point (4-bit in the low bits for weights)
    fp16_t        scale;
    logic [6:0]   chunk;   // which 128-wide slice of the operand vector
    logic         half;    // KV8: 0 = dims 0..63, 1 = dims 64..127
    logic         last;    // last beat of a dot product / of a cache read
    logic [10:0]  tok;     // KV8: token position
  } vbeat_t;

  // ---- FP16 helpers ----
  function automatic logic fp16_is_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

  function automatic fp16_t fp16_neg(fp16_t a);
    return {~a[15], a[14:0]};
  endfunction

  // a > b, treating all zeros (and subnormals) as equal
  function automatic logic fp16_gt(fp16_t a, fp16_t b);
    logic [15:0] ma, mb;
    ma = fp16_is_zero(a) ? 16'd0 : a;
    mb = fp16_is_zero(b) ? 16'd0 : b;
    if (ma[15] != mb[15]) return mb[15] && !(ma[14:0] == 0 && mb[14:0] == 0);
    if (!ma[15]) return ma[14:0] > mb[14:0];
    return ma[14:0] < mb[14:0];
  endfunction

  function automatic fp16_t fp16_mul(fp16_t a, fp16_t b);
    logic        s;
    logic [10:0] fa, fb;
    logic [21:0] p;
    logic [9:0]  m;
    logic        g, st;
    logic [10:0] mr;
    int          e;
    s = a[15] ^ b[15];
    if (a[14:10] == 5'd31 || b[14:10] == 5'd31) return {s, FP16_INF[14:0]};
    if (a[14:10] == 5'd0 || b[14:10] == 5'd0) return {s, 15'd0};
    fa = {1'b1, a[9:0]};
    fb = {1'b1, b[9:0]};
    p  = fa * fb;
    e  = int'(a[14:10]) + int'(b[14:10]) - 15;
    if (p[21]) begin
      m = p[20:11]; g = p[10]; st = |p[9:0]; e = e + 1;
    end else begin
      m = p[19:10]; g = p[9];  st = |p[8:0];
    end
    mr = {1'b0, m} + 11'((g && (st || m[0])) ? 1 : 0);
    if (mr[10]) begin
      e = e + 1; mr = 11'd0;
    end
    if (e >= 31) return {s, FP16_INF[14:0]};
    if (e <= 0)  return {s, 15'd0};
    return {s, 5'(e), mr[9:0]};
  endfunction

  function automatic fp16_t fp16_add(fp16_t a, fp16_t b);
    fp16_t       x, y;
    logic [13:0] mx, my;   // hidden bit, 10 fraction bits, guard, round, sticky
    logic [14:0] sum;
    logic        st;
    int          d, e, lz;
    logic [9:0]  m;
    logic        g;
    logic [10:0] mr;
    if (a[14:10] == 5'd31) return {a[15], FP16_INF[14:0]};
    if (b[14:10] == 5'd31) return {b[15], FP16_INF[14:0]};
    if (a[14:10] == 5'd0 && b[14:10] == 5'd0) return {a[15] & b[15], 15'd0};
    if (a[14:10] == 5'd0) return b;
    if (b[14:10] == 5'd0) return a;
    // order by magnitude
    if (a[14:0] >= b[14:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    mx = {1'b1, x[9:0], 3'b000};
    my = {1'b1, y[9:0], 3'b000};
    d  = int'(x[14:10]) - int'(y[14:10]);
    if (d > 13) begin
      my = 14'd1;                          // only sticky remains
    end else if (d > 0) begin
      st = |(my & ((14'd1 << d) - 14'd1));
      my = (my >> d) | {13'd0, st};
    end
    e = int'(x[14:10]);
    if (x[15] == y[15]) begin
      sum = {1'b0, mx} + {1'b0, my};
      if (sum[14]) begin
        sum = {1'b0, sum[14:1]} | {14'd0, sum[0]};
        e   = e + 1;
      end
    end else begin
      sum = {1'b0, mx} - {1'b0, my};
      if (sum == 15'd0) return 16'h0000;
      lz = 0;
      for (int i = 13; i >= 0; i--) begin
        if (sum[i]) break;
        lz = lz + 1;
      end
      sum = sum << lz;
      e   = e - lz;
    end
    if (e <= 0) return {x[15], 15'd0};
    m  = sum[12:3];
    g  = sum[2];
    st = |sum[1:0];
    mr = {1'b0, m} + 11'((g && (st || m[0])) ? 1 : 0);
    if (mr[10]) begin
      e = e + 1; mr = 11'd0;
    end
    if (e >= 31) return {x[15], FP16_INF[14:0]};
    return {x[15], 5'(e), mr[9:0]};
  endfunction

  function automatic fp16_t fp16_sub(fp16_t a, fp16_t b);
    return fp16_add(a, fp16_neg(b));
  endfunction

  // exact conversion of a small integer (|v| < 2048)
  function automatic fp16_t fp16_from_int(logic signed [11:0] v);
    logic [10:0] mag;
    int          msb;
    logic [21:0] sh;
    if (v == 0) return 16'h0000;
    mag = v[11] ? 11'(-v) : 11'(v);
    msb = 0;
    for (int i = 0; i < 11; i++) if (mag[i]) msb = i;
    sh = 22'(mag) << (10 - msb);
    return {v[11], 5'(15 + msb), sh[9:0]};
  endfunction

  // multiply by 2^k (k signed), flushing and saturating like fp16_mul
  function automatic fp16_t fp16_scale2(fp16_t a, int k);
    int e;
    if (a[14:10] == 5'd0 || a[14:10] == 5'd31) return a;
    e = int'(a[14:10]) + k;
    if (e >= 31) return {a[15], FP16_INF[14:0]};
    if (e <= 0)  return {a[15], 15'd0};
    return {a[15], 5'(e), a[9:0]};
  endfunction

  // FP16 to integer: mode 0 rounds half away from zero, mode 1 is ceiling.
  // Magnitudes of 2048 and above saturate.
  function automatic int fp16_to_int(fp16_t a, logic ceil_mode);
    int          ex, mag;
    logic [10:0] mant;
    logic [21:0] fx;       // 11 integer bits, 11 fraction bits
    logic        frac_nz, half;
    if (a[14:10] == 5'd0) return 0;
    ex = int'(a[14:10]) - 15;
    if (ex >= 11) return a[15] ? -2048 : 2048;
    mant = {1'b1, a[9:0]};
    if (ex >= 0) fx = 22'(mant) << (ex + 1);
    else if (ex >= -11) fx = 22'(mant) >> (-ex - 1);
    else fx = 22'd1;
    mag     = int'(fx[21:11]);
    frac_nz = |fx[10:0] || (ex < -11);
    half    = fx[10];
    if (!ceil_mode) begin
      if (half) mag = mag + 1;
      return a[15] ? -mag : mag;
    end
    if (!a[15]) return frac_nz ? mag + 1 : mag;
    return -mag;
  endfunction

  // real to FP16, for filling lookup tables at start-up (round to nearest)
  function automatic fp16_t fp16_from_real(real r);
    logic s;
    real  v;
    int   ex;
    int   f;
    s = (r < 0.0);
    v = s ? -r : r;
    if (v < 6.103515625e-05) return {s, 15'd0};
    if (v >= 65520.0) return {s, FP16_INF[14:0]};
    ex = 0;
    while (v >= 2.0) begin v = v / 2.0; ex++; end
    while (v < 1.0)  begin v = v * 2.0; ex--; end
    f = int'((v - 1.0) * 1024.0);
    if (f == 1024) begin f = 0; ex++; end
    return {s, 5'(ex + 15), 10'(f)};
  endfunction

endpackage
