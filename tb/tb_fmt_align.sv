// tb_fmt_align: converts random words between all pairs of formats and
// fraction widths and compares with a reference computed on reals.
module tb_fmt_align;
  import shield8_pkg::*;
  import tb_ref_pkg::*;
  prec_e src_prec, dst_prec;
  logic [3:0] src_frac, dst_frac;
  logic [31:0] din, dout, want;
  int checks = 0, failures = 0;

  fmt_align dut (.*);

  initial begin
    real v, sc;
    longint q;
    for (int n = 0; n < 4000; n++) begin
      src_prec = prec_e'($urandom_range(3));
      dst_prec = prec_e'($urandom_range(3));
      src_frac = 4'($urandom_range(7));
      dst_frac = 4'($urandom_range(7));
      case (src_prec)
        PREC_FP32: begin din = rand_fp(118, 134, $urandom_range(1) == 1); v = fp_to_real(din); end
        PREC_BF16: begin
          din = {16'd0, rand_fp(118, 134, $urandom_range(1) == 1) >> 16};
          v = fp_to_real({din[15:0], 16'd0});
        end
        default: begin
          din = 32'($signed(8'($urandom)));
          v = real'($signed(din)) / pow2(int'(src_frac));
        end
      endcase
      case (dst_prec)
        PREC_FP32: want = rnd32(v);
        PREC_BF16: want = {16'd0, rnd16(v)};
        default: begin
          sc = v * pow2(int'(dst_frac));
          q = round_away(sc);
          if (q > 127) q = 127;
          if (q < -128) q = -128;
          want = 32'(q);
        end
      endcase
      #1;
      checks++;
      if (dout !== want) begin
        failures++;
        if (failures < 10) $display("%0d/%0d -> %0d/%0d din %h: %h want %h", src_prec, src_frac,
                                    dst_prec, dst_frac, din, dout, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
