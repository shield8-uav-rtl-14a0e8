// tb_act_cordic: applies every activation function to random inputs in every
// format and compares with the functions evaluated on reals (tolerance: one
// 8-bit LSB, or 2e-3 plus the error caused by the Q4.12 input rounding for
// FP formats). Checks the latency: 1 cycle for ReLU and identity, 51 cycles
// for the CORDIC functions.
module tb_act_cordic;
  import shield8_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  act_e act;
  prec_e prec;
  logic [3:0] frac;
  logic [31:0] x = 0, x2 = 0, y;
  logic busy, done;
  int checks = 0, failures = 0;

  act_cordic dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sig(input real v);
    return 1.0 / (1.0 + $exp(-v));
  endfunction

  function automatic real ref_f(input act_e a, input real v, input real v2);
    case (a)
      ACT_NONE:    return v;
      ACT_RELU:    return (v > 0.0) ? v : 0.0;
      ACT_SIGMOID: return sig(v);
      ACT_TANH:    return 2.0 * sig(2.0 * v) - 1.0;
      ACT_SWISH:   return v * sig(v);
      ACT_GELU:    return v * sig(1.702 * v);
      ACT_SELU:    return (v > 0.0) ? 1.0507009873554805 * v
                                    : 1.0507009873554805 * 1.6732632423543772 * ($exp(v) - 1.0);
      default:     return sig(v - v2);
    endcase
  endfunction

  function automatic real word_val(input logic [31:0] w, input prec_e p, input logic [3:0] f);
    case (p)
      PREC_FP32: return fp_to_real(w);
      PREC_BF16: return fp_to_real({w[15:0], 16'd0});
      default:   return real'($signed(w[7:0])) / pow2(int'(f));
    endcase
  endfunction

  initial begin
    real v, v2, want, got, tol, vq;
    int  lat;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      act  = act_e'(n % 8);
      prec = prec_e'((n / 8) % 4);
      frac = 4'(3 + $urandom_range(3));
      case (prec)
        PREC_FP32: begin
          v = (real'($urandom_range(12000)) - 6000.0) / 1000.0;
          x = rnd32(v);
          v2 = (real'($urandom_range(8000)) - 4000.0) / 1000.0;
          x2 = rnd32(v2);
        end
        PREC_BF16: begin
          v = (real'($urandom_range(12000)) - 6000.0) / 1000.0;
          x = {16'd0, rnd16(v)};
          v2 = (real'($urandom_range(8000)) - 4000.0) / 1000.0;
          x2 = {16'd0, rnd16(v2)};
        end
        default: begin
          x = 32'($signed(8'($urandom)));
          x2 = 32'($signed(8'($urandom)));
        end
      endcase
      v  = word_val(x, prec, frac);
      v2 = word_val(x2, prec, frac);
      // the unit works on Q4.12 inputs, range [-8, 8)
      if (v > 32767.0 / 4096.0) v = 32767.0 / 4096.0;
      if (v < -8.0) v = -8.0;
      if (v2 > 32767.0 / 4096.0) v2 = 32767.0 / 4096.0;
      if (v2 < -8.0) v2 = -8.0;
      if (act == ACT_NONE || act == ACT_RELU) v = word_val(x, prec, frac);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      got  = word_val(y, prec, frac);
      want = ref_f(act, v, v2);
      if (prec == PREC_INT8 || prec == PREC_FXP8) begin
        tol = 1.01 / pow2(int'(frac));
        // the 8-bit output saturates
        if (want > 127.0 / pow2(int'(frac))) want = 127.0 / pow2(int'(frac));
        if (want < -128.0 / pow2(int'(frac))) want = -128.0 / pow2(int'(frac));
      end else begin
        // input rounded to Q4.12 (up to 2^-13), slope of x*sigmoid(1.702x) up to ~1.13
        vq = (prec == PREC_BF16) ? 2.0 / 128.0 * ((want < 0.0) ? -want : want) : 0.0;
        tol = 2.0e-3 + vq;
      end
      checks += 2;
      if (got - want > tol || want - got > tol) begin
        failures++;
        if (failures < 15) $display("act %0d prec %0d frac %0d x=%f x2=%f: got %f want %f", act,
                                    prec, frac, v, v2, got, want);
      end
      if (lat != ((act == ACT_NONE || act == ACT_RELU) ? 1 : 51)) begin
        failures++;
        if (failures < 15) $display("act %0d latency %0d", act, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
