// shield8_pkg: types, constants and arithmetic shared by the whole accelerator.
//
// The accelerator runs every layer of a 1D feature CNN on one shared datapath.
// Each layer is executed in one of four number formats, selected per layer:
//   FP32 : IEEE-754 single precision, words stored as 32 bits
//   BF16 : bfloat16 (upper half of an FP32 word), accumulated in FP32
//   INT8 : signed 8-bit integers, accumulated in a 32-bit integer
//   FXP8 : signed 8-bit fixed point Q(8-F).F, accumulated in a 32-bit integer
// Every activation and weight occupies one 32-bit word; 8-bit values are
// sign-extended, BF16 values sit in bits [15:0].
//
// The floating-point helpers below are this design's own choice (the paper
// names the formats but gives no arithmetic detail): round to nearest even,
// subnormals flushed to zero, overflow to infinity (clamped later by the
// scale-and-shift stage), no NaN propagation.
package shield8_pkg;


  typedef enum logic [1:0] {
    PREC_FP32 = 2'd0,
    PREC_BF16 = 2'd1,
    PREC_INT8 = 2'd2,
    PREC_FXP8 = 2'd3
  } prec_e;

  typedef enum logic [2:0] {
    ACT_NONE    = 3'd0,
    ACT_RELU    = 3'd1,
    ACT_SIGMOID = 3'd2,
    ACT_TANH    = 3'd3,
    ACT_SWISH   = 3'd4,
    ACT_GELU    = 3'd5,
    ACT_SELU    = 3'd6,
    ACT_SOFTMAX = 3'd7
  } act_e;

  // One layer as the control engine sees it. A dense layer is a convolution
  // with in_len = 1 and k = 1 over in_ch inputs.
  typedef struct packed {
    logic [15:0] in_ch;   // input channels (dense: input features)
    logic [15:0] in_len;  // input length per channel (dense: 1)
    logic [15:0] out_ch;  // output channels / neurons
    logic [3:0]  k;       // kernel size (dense: 1)
    logic        pool;    // 1: max-pool by 2 after the activation
    prec_e       prec;    // number format of this layer
    act_e        act;     // activation function
    logic [3:0]  frac;    // fraction bits of 8-bit values of this layer
    logic [15:0] scale;   // INT8 requantisation multiplier
    logic [4:0]  shift;   // requantisation right shift
  } layer_desc_t;

  // Fixed-point format of the activation unit: signed Q4.12 in 16 bits.
  localparam int unsigned ACT_FRAC = 12;

  // --------------------------------------------------------------------
  // Floating point
  // --------------------------------------------------------------------

  // Normalise and round. The value is m * 2^(e - 190); e is the biased
  // exponent the result has when the leading one of m is at bit 63.
  function automatic logic [31:0] fp_round_pack(input logic s, input int e, input logic [63:0] m);
    int          ee;
    logic [63:0] mm;
    logic [23:0] mant;
    logic        g, st;
    if (m == 64'd0) return 32'd0;
    ee = e;
    mm = m;
    for (int i = 0; i < 64; i++) begin
      if (!mm[63]) begin
        mm = mm << 1;
        ee = ee - 1;
      end
    end
    mant = {1'b0, mm[62:40]};
    g    = mm[39];
    st   = |mm[38:0];
    if (g && (st || mant[0])) mant = mant + 24'd1;
    if (mant[23]) begin
      mant = 24'd0;
      ee   = ee + 1;
    end
    if (ee >= 255) return {s, 8'hFF, 23'd0};
    if (ee <= 0) return {s, 31'd0};
    return {s, ee[7:0], mant[22:0]};
  endfunction

  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic [47:0] p;
    logic        s;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    return fp_round_pack(s, int'(a[30:23]) + int'(b[30:23]) - 126, {p, 16'd0});
  endfunction

  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] x, y;
    logic [63:0] mx, my, lost;
    int          d;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? 32'd0 : b;
    if (b[30:23] == 8'd0) return a;
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    mx = {25'd0, 1'b1, x[22:0], 15'd0} << 24;
    my = {25'd0, 1'b1, y[22:0], 15'd0} << 24;
    d  = int'(x[30:23]) - int'(y[30:23]);
    if (d > 62) my = 64'd1;
    else if (d > 0) begin
      lost = my & ((64'd1 << d) - 64'd1);
      my   = (my >> d) | {63'd0, |lost};
    end
    if (x[31] == y[31]) return fp_round_pack(x[31], int'(x[30:23]) + 1, mx + my);
    return fp_round_pack(x[31], int'(x[30:23]) + 1, mx - my);
  endfunction

  function automatic logic [15:0] fp32_to_bf16(input logic [31:0] a);
    logic [16:0] r;
    if (a[30:23] == 8'hFF) return a[31:16];
    r = {1'b0, a[31:16]};
    if (a[15] && ((|a[14:0]) || a[16])) r = r + 17'd1;
    return r[15:0];
  endfunction

  function automatic logic [31:0] bf16_to_fp32(input logic [15:0] b);
    return {b, 16'd0};
  endfunction

  // Signed integer v with f fraction bits to FP32.
  function automatic logic [31:0] int_to_fp32(input logic signed [31:0] v, input int f);
    logic [31:0] mag;
    mag = v[31] ? 32'(-v) : 32'(v);
    return fp_round_pack(v[31], 158 - f, {mag, 32'd0});
  endfunction

  // FP32 to a signed integer with f fraction bits, rounded half away from
  // zero and saturated to [lo, hi]. ovf reports saturation.
  function automatic logic signed [31:0] fp32_to_int(input logic [31:0] a, input int f,
                                                     input int lo, input int hi, output logic ovf);
    int          sh;
    logic [55:0] mag;
    logic [31:0] r;
    logic signed [32:0] v;
    ovf = 1'b0;
    if (a[30:23] == 8'd0) return 32'sd0;
    sh = int'(a[30:23]) - 150 + f;        // value * 2^f = M * 2^sh
    if (sh >= 8) begin
      ovf = 1'b1;
      return a[31] ? lo : hi;
    end
    mag = {32'd0, 1'b1, a[22:0]};
    if (sh >= 0) r = 32'(mag << sh);
    else if (sh < -25) r = 32'd0;
    else begin
      mag = mag << 1;                      // one extra bit for rounding
      mag = (mag >> (-sh)) + 56'd1;
      r   = 32'(mag >> 1);
    end
    v = a[31] ? -$signed({1'b0, r}) : $signed({1'b0, r});
    if (v > 33'(hi)) begin ovf = 1'b1; return hi; end
    if (v < 33'(lo)) begin ovf = 1'b1; return lo; end
    return 32'(v);
  endfunction

  // FP32 greater-than for finite values.
  function automatic logic fp32_gt(input logic [31:0] a, input logic [31:0] b);
    logic az, bz;
    az = (a[30:23] == 8'd0);
    bz = (b[30:23] == 8'd0);
    if (az && bz) return 1'b0;
    if (az) return b[31];
    if (bz) return !a[31];
    if (a[31] != b[31]) return b[31];
    return a[31] ? (a[30:0] < b[30:0]) : (a[30:0] > b[30:0]);
  endfunction

  // Greater-than on two stored words of format p.
  function automatic logic word_gt(input logic [31:0] a, input logic [31:0] b, input prec_e p);
    case (p)
      PREC_FP32: return fp32_gt(a, b);
      PREC_BF16: return fp32_gt(bf16_to_fp32(a[15:0]), bf16_to_fp32(b[15:0]));
      default:   return $signed(a[7:0]) > $signed(b[7:0]);
    endcase
  endfunction

endpackage
