// mp_mac: the shared multi-precision multiply-accumulate unit.
//
// One multiply-accumulate per cycle in the format chosen for the current
// layer:
//   INT8 / FXP8 : sext(a[7:0]) * sext(w[7:0]) added to a 32-bit integer
//   BF16        : bf16 * bf16 (exact in FP32) added to an FP32 accumulator
//   FP32        : FP32 product, rounded, added to an FP32 accumulator
// The wide accumulators are the "extended precision" that keeps 8-bit and
// BF16 accumulation stable: 8704 products of two int8 values stay below 2^31.
//
// Interface: clr loads the accumulator with init (the row's starting value,
// normally 0); en adds a*w. clr has priority. acc is registered, so the sum of
// N operand pairs presented on N consecutive en cycles is on acc the cycle
// after the last one.
// The paper describes a multi-precision MAC array with extended-precision
// accumulators; this design uses a single lane (one MAC per cycle, matching
// the paper's cycle model of one cycle per MAC) and chooses the rounding.
module mp_mac
  import shield8_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  prec_e       prec,
  input  logic        clr,
  input  logic [31:0] init,
  input  logic        en,
  input  logic [31:0] a,
  input  logic [31:0] w,
  output logic [31:0] acc
);
  logic [31:0] nxt;
  logic signed [15:0] iprod;

  always_comb begin
    iprod = $signed(a[7:0]) * $signed(w[7:0]);
    case (prec)
      PREC_FP32: nxt = fp32_add(acc, fp32_mul(a, w));
      PREC_BF16: nxt = fp32_add(acc, fp32_mul(bf16_to_fp32(a[15:0]), bf16_to_fp32(w[15:0])));
      default:   nxt = acc + 32'(iprod);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clr) acc <= init;
    else if (en) acc <= nxt;
  end
endmodule
