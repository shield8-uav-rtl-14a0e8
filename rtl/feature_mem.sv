// feature_mem: on-chip feature-map memory (one bank).
//
// Holds the staged input vector and the output feature maps of a layer so
// that the next layer can read them without going back to the host. The
// accelerator uses two banks as a ping-pong pair: layer l reads one bank and
// writes the other. Each entry is one 32-bit word in the format of the layer
// that wrote it (see shield8_pkg).
//
// Interface: one synchronous write port and one synchronous read port.
// Timing: read data appears on rdata the cycle after re is high with raddr;
// a write is visible to reads issued from the following cycle on.
// The paper names the feature memory and its staging role; the ping-pong
// arrangement, word width and single-cycle read latency are this design's.
module feature_mem #(
  parameter int unsigned DEPTH = 142336,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
