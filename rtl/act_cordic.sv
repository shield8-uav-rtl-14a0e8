// act_cordic: CORDIC-based activation function unit.
//
// Applies one of ReLU, Sigmoid, Tanh, Swish, GELU, SeLU or two-class SoftMax
// to a word in the layer's format (FP32, BF16, INT8 or FXP8 with frac
// fraction bits) and returns the result in the same format.
//
// How it works. ReLU and the identity act on the stored word directly. The
// other functions are all built from one exponential and one division:
//   1. the input is converted to signed Q4.12 fixed point (saturating);
//   2. the argument a is formed: x (Sigmoid, Swish), 2x (Tanh),
//      1.702x (GELU, sigmoid approximation), x - x2 (SoftMax), x (SeLU);
//   3. e = exp(-|a|) is computed by range reduction |a| = q*ln2 + r,
//      a hyperbolic CORDIC in rotation mode giving cosh(-r) + sinh(-r), and
//      a right shift by q;
//   4. a linear CORDIC in vectoring mode divides: s = 1/(1+e) for a >= 0,
//      s = e/(1+e) otherwise, so s = sigmoid(a);
//   5. the result is s (Sigmoid, SoftMax), 2s-1 (Tanh), x*s (Swish, GELU),
//      or for SeLU lambda*x (x > 0) and lambda*alpha*(e - 1) (x <= 0);
//   6. it is rounded back to the layer's format.
// Internal values use 24 fraction bits. The hyperbolic CORDIC runs 22
// micro-rotations (shifts 1..20 with 4 and 13 repeated), the division 25.
//
// Interface: start with act/prec/frac/x/x2 held stable; done pulses for one
// cycle with y valid (y holds until the next start). x2 is only used by
// SoftMax: softmax(x, x2)[0] = exp(x) / (exp(x) + exp(x2)) = sigmoid(x - x2).
// Timing: done follows start by 1 cycle for ReLU and the identity, and by
// 51 cycles for the CORDIC functions (1 set-up, 22 rotations, 1 + 25 for the
// division, 1 to round, 1 to convert the input).
// The paper states only that the activation unit is CORDIC-based and lists
// the seven functions; the decomposition above, the Q4.12 input format and the
// iteration counts are this design's choices.
module act_cordic
  import shield8_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  act_e        act,
  input  prec_e       prec,
  input  logic [3:0]  frac,
  input  logic [31:0] x,
  input  logic [31:0] x2,
  output logic        busy,
  output logic        done,
  output logic [31:0] y
);
  localparam int FB = 24;
  localparam logic signed [47:0] ONE     = 48'sd1 <<< FB;
  localparam logic signed [47:0] INV_K   = 48'sd20258439;  // 1/K_h, Q.24
  localparam logic signed [47:0] LN2     = 48'sd11629080;  // ln 2, Q.24
  localparam logic signed [47:0] INV_LN2 = 48'sd94548;     // 1/ln 2, Q.16
  localparam logic signed [47:0] GELU_C  = 48'sd6971;      // 1.702, Q.12
  localparam logic signed [47:0] SELU_L  = 48'sd4304;      // lambda, Q.12
  localparam logic signed [47:0] SELU_LA = 48'sd7201;      // lambda*alpha, Q.12

  typedef enum logic [2:0] {S_IDLE, S_PREP, S_ROT, S_DIV, S_FIN} state_e;
  state_e state;

  // atanh(2^-i) in Q.24 for i = 1..20
  function automatic logic signed [47:0] atanh_tab(input int i);
    case (i)
      1: return 48'sd9215828;  2: return 48'sd4285116;  3: return 48'sd2108178;
      4: return 48'sd1049945;  5: return 48'sd524459;   6: return 48'sd262165;
      7: return 48'sd131075;   default: return ONE >>> i;
    endcase
  endfunction

  // shift of micro-rotation number n (0..21): 1,2,3,4,4,5,..,13,13,14,..,20
  function automatic int rot_shift(input int n);
    if (n < 4) return n + 1;
    if (n < 14) return n;
    return n - 1;
  endfunction

  function automatic logic signed [15:0] to_q12(input logic [31:0] w, input prec_e p,
                                                input logic [3:0] f);
    logic ovf;
    logic signed [31:0] v;
    case (p)
      PREC_FP32: return 16'(fp32_to_int(w, ACT_FRAC, -32768, 32767, ovf));
      PREC_BF16: return 16'(fp32_to_int(bf16_to_fp32(w[15:0]), ACT_FRAC, -32768, 32767, ovf));
      default: begin
        v = 32'($signed(w[7:0])) <<< (ACT_FRAC - int'(f));
        if (v > 32767) return 16'sd32767;
        if (v < -32768) return -16'sd32768;
        return 16'(v);
      end
    endcase
  endfunction

  logic signed [15:0] xq;          // input in Q4.12
  logic signed [47:0] cx, cy, cz;  // CORDIC registers
  logic signed [47:0] e_val;       // exp(-|a|), Q.24
  logic               neg_a;       // a < 0
  logic [4:0]         q;           // range-reduction exponent
  logic [4:0]         n;           // iteration counter
  act_e               act_r;
  prec_e              prec_r;
  logic [3:0]         frac_r;

  // combinational argument preparation (state S_PREP)
  logic signed [47:0] a_q24, t_q24, qprod, r_q24;
  logic signed [16:0] diff;
  always_comb begin
    diff = 17'(xq) - 17'(to_q12(x2, prec_r, frac_r));
    case (act_r)
      ACT_TANH:    a_q24 = 48'(xq) <<< (FB - ACT_FRAC + 1);
      ACT_GELU:    a_q24 = (48'(xq) * GELU_C);
      ACT_SOFTMAX: a_q24 = 48'(diff) <<< (FB - ACT_FRAC);
      default:     a_q24 = 48'(xq) <<< (FB - ACT_FRAC);
    endcase
    t_q24 = (a_q24 < 0) ? -a_q24 : a_q24;
    qprod = (t_q24 * INV_LN2) >>> (FB + 16);
    r_q24 = t_q24 - qprod * LN2;
  end

  // final result in Q.24 (state S_FIN), s = sigmoid(a) is held in cz
  logic signed [47:0] res, xs;
  logic               ovf_unused;
  logic signed [31:0] ires;
  always_comb begin
    xs = 48'(xq);
    case (act_r)
      ACT_TANH:  res = (cz <<< 1) - ONE;
      ACT_SWISH, ACT_GELU: res = (xs * cz) >>> ACT_FRAC;
      ACT_SELU:  res = (xq > 0) ? xs * SELU_L : ((e_val - ONE) * SELU_LA) >>> ACT_FRAC;
      default:   res = cz;
    endcase
    ires = 32'(res);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      y      <= '0;
      cx     <= '0;
      cy     <= '0;
      cz     <= '0;
      e_val  <= '0;
      neg_a  <= 1'b0;
      q      <= '0;
      n      <= '0;
      xq     <= '0;
      act_r  <= ACT_NONE;
      prec_r <= PREC_INT8;
      frac_r <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          act_r  <= act;
          prec_r <= prec;
          frac_r <= frac;
          xq     <= to_q12(x, prec, frac);
          if (act == ACT_NONE) begin
            y     <= x;
            done  <= 1'b1;
            state <= S_IDLE;
          end else if (act == ACT_RELU) begin
            case (prec)
              PREC_FP32: y <= x[31] ? 32'd0 : x;
              PREC_BF16: y <= x[15] ? 32'd0 : x;
              default:   y <= x[7] ? 32'd0 : x;
            endcase
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_PREP;
        end
        S_PREP: begin
          neg_a <= (a_q24 < 0);
          q     <= (qprod > 23) ? 5'd24 : 5'(qprod);
          cx    <= INV_K;
          cy    <= '0;
          cz    <= -r_q24;
          n     <= '0;
          state <= S_ROT;
        end
        S_ROT: begin
          if (cz >= 0) begin
            cx <= cx + (cy >>> rot_shift(int'(n)));
            cy <= cy + (cx >>> rot_shift(int'(n)));
            cz <= cz - atanh_tab(rot_shift(int'(n)));
          end else begin
            cx <= cx - (cy >>> rot_shift(int'(n)));
            cy <= cy - (cx >>> rot_shift(int'(n)));
            cz <= cz + atanh_tab(rot_shift(int'(n)));
          end
          if (n == 5'd21) begin
            n     <= 5'd31;             // marks the division set-up cycle
            state <= S_DIV;
          end else n <= n + 5'd1;
        end
        S_DIV: begin
          if (n == 5'd31) begin
            // set up division: numerator in cy, denominator in cx, quotient in cz
            e_val <= (cx + cy) >>> q;
            cx    <= ONE + ((cx + cy) >>> q);
            cy    <= neg_a ? ((cx + cy) >>> q) : ONE;
            cz    <= '0;
            n     <= '0;
          end else begin
            if (cy >= 0) begin
              cy <= cy - (cx >>> n);
              cz <= cz + (ONE >>> n);
            end else begin
              cy <= cy + (cx >>> n);
              cz <= cz - (ONE >>> n);
            end
            if (n == 5'd24) state <= S_FIN;
            else n <= n + 5'd1;
          end
        end
        S_FIN: begin
          case (prec_r)
            PREC_FP32: y <= int_to_fp32(ires, FB);
            PREC_BF16: y <= {16'd0, fp32_to_bf16(int_to_fp32(ires, FB))};
            default:   y <= fp32_to_int(int_to_fp32(ires, FB), int'(frac_r), -128, 127, ovf_unused);
          endcase
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
