// fmt_align: precision alignment between layers.
//
// Layers may run in different formats. A layer's outputs are stored in that
// layer's own format; when the next layer reads them, this combinational unit
// converts each word from the source format (src_prec, src_frac) to the
// format of the reading layer (dst_prec, dst_frac):
//   8-bit -> 8-bit : shift by the difference of fraction bits, round, saturate
//   8-bit -> FP    : exact conversion of v * 2^-src_frac
//   FP    -> 8-bit : round(x * 2^dst_frac), saturated to [-128, 127]
//   FP32 <-> BF16  : BF16 is widened exactly, FP32 is rounded to nearest even
// The paper states that the datapath supports the four formats "via
// programmable alignment and scaling logic"; the conversion rules are this
// design's.
module fmt_align
  import shield8_pkg::*;
(
  input  prec_e       src_prec,
  input  logic [3:0]  src_frac,
  input  prec_e       dst_prec,
  input  logic [3:0]  dst_frac,
  input  logic [31:0] din,
  output logic [31:0] dout
);
  logic [31:0] f;      // source value as FP32
  logic        ovf;
  logic signed [31:0] iv;

  always_comb begin
    ovf = 1'b0;
    iv  = '0;
    case (src_prec)
      PREC_FP32: f = din;
      PREC_BF16: f = bf16_to_fp32(din[15:0]);
      default:   f = int_to_fp32(32'($signed(din[7:0])), int'(src_frac));
    endcase
    case (dst_prec)
      PREC_FP32: dout = f;
      PREC_BF16: dout = {16'd0, fp32_to_bf16(f)};
      default: begin
        // exact through FP32 for 8-bit sources (8 bits fit the mantissa)
        iv   = fp32_to_int(f, int'(dst_frac), -128, 127, ovf);
        dout = iv;
      end
    endcase
  end
endmodule
