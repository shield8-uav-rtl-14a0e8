// tb_scale_shift: requantises random accumulators in all four formats and
// checks value and overflow flag against an independent reference.
module tb_scale_shift;
  import shield8_pkg::*;
  import tb_ref_pkg::*;
  prec_e prec;
  logic [15:0] scale;
  logic [4:0] shift;
  logic [31:0] x, y, want;
  logic ovf, want_ovf;
  int checks = 0, failures = 0, n_ovf = 0;

  scale_shift dut (.*);

  initial begin
    longint p, q;
    real r;
    for (int n = 0; n < 6000; n++) begin
      prec  = prec_e'($urandom_range(3));
      scale = 16'($urandom);
      shift = 5'($urandom_range(31));
      want_ovf = 0;
      if (prec == PREC_INT8 || prec == PREC_FXP8) begin
        x = 32'($signed(24'($urandom)));
        if (n % 7 == 0) x = $urandom;
        p = longint'($signed(x));
        if (prec == PREC_INT8) p = p * longint'(scale);
        r = real'(p) / pow2(int'(shift));
        q = round_away(r);
        if (q > 127) begin q = 127; want_ovf = 1; end
        if (q < -128) begin q = -128; want_ovf = 1; end
        want = 32'(q);
      end else begin
        x = rand_fp(1, 254, $urandom_range(1) == 1);
        if (n % 11 == 0) x = {x[31], 8'hFF, 23'd0};
        if (x[30:23] == 8'hFF) begin
          want = {x[31], 8'hFE, 23'h7FFFFF};
          want_ovf = 1;
        end else if (int'(x[30:23]) - int'(shift) <= 0) want = {x[31], 31'd0};
        else want = rnd32(fp_to_real(x) / pow2(int'(shift)));
        if (prec == PREC_BF16) begin
          if (want[30:23] == 8'hFE && want[22:0] == 23'h7FFFFF) want = {16'd0, want[31], 15'h7F7F};
          else if (want[30:23] == 8'd0) want = {16'd0, want[31], 15'd0};
          else begin
            want = {16'd0, rnd16(fp_to_real(want))};
            if (want[14:7] == 8'hFF) begin want = {16'd0, want[15], 15'h7F7F}; want_ovf = 1; end
          end
        end
      end
      #1;
      checks += 2;
      if (want_ovf) n_ovf++;
      if (y !== want || ovf !== want_ovf) begin
        failures++;
        if (failures < 10) $display("prec %0d x %h sc %0d sh %0d: %h/%b want %h/%b", prec, x,
                                    scale, shift, y, ovf, want, want_ovf);
      end
    end
    checks++;
    if (n_ovf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
