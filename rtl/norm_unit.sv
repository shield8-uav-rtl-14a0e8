// norm_unit: normalisation stage after accumulation.
//
// Adds the per-channel offset of the output channel to the accumulator. With
// batch normalisation folded into the preceding layer at training time this
// offset is the whole of the normalisation at inference, and it also serves
// as the layer bias. The offset comes with the channel's weight row on the
// input stream, in the accumulator's format: a 32-bit integer for INT8/FXP8
// layers (same scale as the accumulator), an FP32 value for FP32/BF16 layers.
//
// Interface and timing: combinational, acc and offset in, y out.
// The paper names a normalisation stage but not its arithmetic; folding it
// into one offset addition is this design's choice.
module norm_unit
  import shield8_pkg::*;
(
  input  prec_e       prec,
  input  logic [31:0] acc,
  input  logic [31:0] offset,
  output logic [31:0] y
);
  always_comb begin
    case (prec)
      PREC_FP32, PREC_BF16: y = fp32_add(acc, offset);
      default:              y = acc + offset;
    endcase
  end
endmodule
