// tb_norm_unit: adds random offsets to random accumulators in integer and
// floating-point modes and checks the sums against a real-number reference.
module tb_norm_unit;
  import shield8_pkg::*;
  import tb_ref_pkg::*;
  prec_e prec;
  logic [31:0] acc, offset, y, want;
  int checks = 0, failures = 0;

  norm_unit dut (.*);

  initial begin
    for (int n = 0; n < 3000; n++) begin
      prec = prec_e'($urandom_range(3));
      if (prec == PREC_INT8 || prec == PREC_FXP8) begin
        acc = $urandom; offset = $urandom;
        want = acc + offset;
      end else begin
        acc = rand_fp(110, 140, $urandom_range(1) == 1);
        offset = rand_fp(110, 140, $urandom_range(1) == 1);
        want = rnd32(fp_to_real(acc) + fp_to_real(offset));
      end
      #1;
      checks++;
      if (y !== want) begin
        failures++;
        if (failures < 10) $display("prec %0d %h + %h = %h want %h", prec, acc, offset, y, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
