// weight_buf: weight buffer of the shared datapath.
//
// Holds one weight row: the in_ch*k kernel weights of the output channel (or
// the in_ch weights of the dense neuron) being computed. The row is written
// once from the AXI-Stream input and then read once per output position, so
// convolution weights are fetched from the host only once per channel.
//
// Interface: write port (we, waddr, wdata) fed by the stream, read port
// (re, raddr) driven by the control engine. Timing: synchronous read, data on
// rdata one cycle after re. Besides the row, a separate register keeps the
// row's bias word, written when bias_we is high.
// The paper only says the datapath has a weight buffer; its organisation as a
// one-row buffer with a bias register is this design's choice.
module weight_buf #(
  parameter int unsigned DEPTH = 8704,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          bias_we,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata,
  output logic [31:0]   bias
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (bias_we) bias <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
