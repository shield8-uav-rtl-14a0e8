// tb_feature_mem: writes every word of a small feature memory with random
// data, reads all words back in a shuffled order and checks the data and the
// one-cycle read latency.
module tb_feature_mem;
  localparam int DEPTH = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [DEPTH];
  int checks = 0, failures = 0;

  feature_mem #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 3 * DEPTH; n++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("addr %0d: got %h want %h", a, rdata, model[a]);
      end
    end
    // overwrite and read in the next cycle
    @(negedge clk); we = 1; waddr = 6'd7; wdata = 32'hA5A5_0007; model[7] = wdata;
    @(negedge clk); we = 0; re = 1; raddr = 6'd7;
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== model[7]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
