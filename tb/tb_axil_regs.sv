// tb_axil_regs: AXI-Lite reads and writes with random response back-pressure.
// Writes random descriptor tables and NLAYERS, reads them back over the bus
// and through the prefetcher port, checks the start and clear pulses and the
// status and cycle registers.
module tb_axil_regs;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0] bresp, rresp;
  logic start, clr;
  logic [3:0] num_layers, desc_idx = 0;
  logic [31:0] status = 32'h1234_5678, cycles = 32'd999, desc_w0, desc_w1, desc_w2;
  logic [31:0] model [8][3];
  int checks = 0, failures = 0, n_start = 0, n_clr = 0;

  axil_regs #(.MAX_LAYERS(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && start) n_start++;
    if (rst_n && clr) n_clr++;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!(awvalid && awready === 1'b0 && bvalid));
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk);
    bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(negedge clk); while (!rvalid);
    arvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk);
    d = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 8; l++)
      for (int j = 0; j < 3; j++) begin
        model[l][j] = $urandom;
        wr(8'(8'h80 + 16 * l + 4 * j), model[l][j]);
      end
    wr(8'h08, 32'd7);
    for (int l = 0; l < 8; l++)
      for (int j = 0; j < 3; j++) begin
        rd(8'(8'h80 + 16 * l + 4 * j), d);
        checks++;
        if (d !== model[l][j]) begin failures++; $display("desc %0d.%0d %h/%h", l, j, d, model[l][j]); end
      end
    for (int l = 0; l < 8; l++) begin
      desc_idx = 4'(l);
      #1;
      checks++;
      if (desc_w0 !== model[l][0] || desc_w1 !== model[l][1] || desc_w2 !== model[l][2]) failures++;
    end
    rd(8'h08, d); checks++; if (d !== 32'd7 || num_layers !== 4'd7) failures++;
    rd(8'h04, d); checks++; if (d !== status) failures++;
    rd(8'h0C, d); checks++; if (d !== cycles) failures++;
    wr(8'h00, 32'd1);
    wr(8'h00, 32'd2);
    wr(8'h00, 32'd3);
    checks += 2;
    if (n_start != 2) begin failures++; $display("start pulses %0d", n_start); end
    if (n_clr != 2) begin failures++; $display("clr pulses %0d", n_clr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
