// scale_shift: requantisation and overflow handling.
//
// Brings the normalised accumulator back to the layer's storage format:
//   INT8 : y = round((x * scale) / 2^shift), the integer multiplier and shift
//          together approximate the real requantisation factor
//   FXP8 : y = round(x / 2^shift), a pure binary-point shift (scale unused)
//   FP32 : y = x * 2^-shift (exponent adjustment)
//   BF16 : as FP32, then rounded to bfloat16 (nearest even)
// Rounding is half away from zero for the integer modes. Overflow handling:
// 8-bit results saturate to [-128, 127]; an FP result that is infinite is
// clamped to the largest finite value of its sign. ovf is high whenever
// either happened.
//
// Interface and timing: combinational.
// The paper lists "normalization, scale-and-shift, and overflow handling"
// without formulas; the formulas above are this design's.
module scale_shift
  import shield8_pkg::*;
(
  input  prec_e       prec,
  input  logic [15:0] scale,
  input  logic [4:0]  shift,
  input  logic [31:0] x,
  output logic [31:0] y,
  output logic        ovf
);
  logic signed [47:0] prod, rnd, q;
  logic signed [31:0] xs;
  logic [31:0]        f;
  int                 e;

  always_comb begin
    ovf  = 1'b0;
    xs   = $signed(x);
    prod = (prec == PREC_INT8) ? xs * $signed({1'b0, scale}) : 48'(xs);
    // round half away from zero
    rnd  = (shift == 5'd0) ? 48'sd0 : (48'sd1 <<< (shift - 5'd1));
    if (prod < 0) q = -((-prod + rnd) >>> shift);
    else          q = (prod + rnd) >>> shift;
    f = x;
    e = 0;
    case (prec)
      PREC_FP32, PREC_BF16: begin
        e = int'(x[30:23]) - int'(shift);
        if (x[30:23] == 8'hFF) begin
          f   = {x[31], 8'hFE, 23'h7FFFFF};
          ovf = 1'b1;
        end else if (x[30:23] == 8'd0 || e <= 0) f = {x[31], 31'd0};
        else f = {x[31], e[7:0], x[22:0]};
        if (prec == PREC_BF16) begin
          f = {16'd0, fp32_to_bf16(f)};
          if (f[14:7] == 8'hFF) begin
            f   = {16'd0, f[15], 8'hFE, 7'h7F};
            ovf = 1'b1;
          end
        end
        y = f;
      end
      default: begin
        if (q > 127) begin y = 32'd127; ovf = 1'b1; end
        else if (q < -128) begin y = 32'hFFFF_FF80; ovf = 1'b1; end
        else y = 32'(q);
      end
    endcase
  end
endmodule
