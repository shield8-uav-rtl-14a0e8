// tb_weight_buf: loads two weight rows with their bias words, as the input
// stream would, and reads each row back twice, checking data and bias.
module tb_weight_buf;
  localparam int DEPTH = 24;
  logic clk = 0, we = 0, bias_we = 0, re = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata, bias;
  logic [31:0] model [DEPTH];
  logic [31:0] mbias;
  int checks = 0, failures = 0;

  weight_buf #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int row = 0; row < 2; row++) begin
      @(negedge clk); bias_we = 1; wdata = $urandom; mbias = wdata;
      @(negedge clk); bias_we = 0;
      for (int i = 0; i < DEPTH; i++) begin
        we = 1; waddr = 5'(i); wdata = $urandom; model[i] = wdata;
        @(negedge clk);
      end
      we = 0;
      for (int pass = 0; pass < 2; pass++)
        for (int i = 0; i < DEPTH; i++) begin
          re = 1; raddr = 5'(i);
          @(negedge clk); re = 0;
          checks += 2;
          if (rdata !== model[i]) begin failures++; $display("w[%0d] %h/%h", i, rdata, model[i]); end
          if (bias !== mbias) begin failures++; $display("bias %h/%h", bias, mbias); end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
