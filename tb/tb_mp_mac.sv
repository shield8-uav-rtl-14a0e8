// tb_mp_mac: accumulates random vectors in each of the four formats and
// compares the accumulator with a reference computed in double precision
// (products rounded to FP32 for FP32 mode, exact for BF16, integers for the
// 8-bit modes). Also checks that the sum is ready the cycle after the last
// enable and that clr has priority over en.
module tb_mp_mac;
  import shield8_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  prec_e prec = PREC_INT8;
  logic [31:0] init = 0, a = 0, w = 0, acc;
  int checks = 0, failures = 0;

  mp_mac dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input prec_e p, input int n, input logic mixed);
    longint      isum;
    logic [31:0] fsum;
    logic [31:0] av, wv;
    real         prod;
    prec = p; isum = 0; fsum = 32'd0;
    @(negedge clk); clr = 1; init = 0;
    @(negedge clk); clr = 0;
    for (int i = 0; i < n; i++) begin
      case (p)
        PREC_INT8, PREC_FXP8: begin
          av = 32'($signed(8'($urandom)));
          wv = 32'($signed(8'($urandom)));
          isum += longint'($signed(av)) * longint'($signed(wv));
        end
        PREC_BF16: begin
          av = {16'd0, rand_fp(120, 134, mixed && $urandom_range(1) == 1) >> 16};
          wv = {16'd0, rand_fp(120, 134, 1'b0) >> 16};
          prod = fp_to_real({av[15:0], 16'd0}) * fp_to_real({wv[15:0], 16'd0});
          fsum = rnd32(fp_to_real(fsum) + prod);
        end
        default: begin
          av = rand_fp(120, 134, mixed && $urandom_range(1) == 1);
          wv = rand_fp(120, 134, 1'b0);
          prod = fp_to_real(rnd32(fp_to_real(av) * fp_to_real(wv)));
          fsum = rnd32(fp_to_real(fsum) + prod);
        end
      endcase
      en = 1; a = av; w = wv;
      @(negedge clk);
    end
    en = 0;
    checks++;
    if (p == PREC_INT8 || p == PREC_FXP8) begin
      if ($signed(acc) != 32'(isum)) begin
        failures++; $display("prec %0d: acc %0d want %0d", p, $signed(acc), isum);
      end
    end else if (acc !== fsum) begin
      failures++; $display("prec %0d: acc %h want %h (%f)", p, acc, fsum, fp_to_real(fsum));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      run(PREC_INT8, 1 + int'($urandom_range(40)), 1'b0);
      run(PREC_FXP8, 1 + int'($urandom_range(40)), 1'b0);
      run(PREC_BF16, 1 + int'($urandom_range(30)), 1'b0);
      run(PREC_FP32, 1 + int'($urandom_range(30)), 1'b0);
    end
    // a long 8-bit row of extreme values (first dense layer length)
    prec = PREC_INT8;
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    for (int i = 0; i < 8704; i++) begin
      en = 1; a = 32'hFFFF_FF80; w = 32'hFFFF_FF80;
      @(negedge clk);
    end
    en = 0;
    checks++;
    if ($signed(acc) != 32'(8704 * 128 * 128)) failures++;
    // clr wins over en, and loads init
    @(negedge clk); clr = 1; en = 1; init = 32'd77; a = 32'd3; w = 32'd5;
    @(negedge clk); clr = 0; en = 0;
    checks++;
    if (acc !== 32'd77) begin failures++; $display("clr priority: %0d", acc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
