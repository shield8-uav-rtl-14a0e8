// axil_regs: AXI-Lite configuration slave and workload configuration.
//
// The host configures a run and reads its status through these registers
// (byte addresses, 32-bit registers):
//   0x00 CTRL    write: bit 0 starts an inference, bit 1 clears the flags
//   0x04 STATUS  read : bit 0 busy, bit 1 done, bit 2 overflow,
//                       [7:4] current layer, [31:16] overflow count
//   0x08 NLAYERS read/write: number of layers to run (1..MAX_LAYERS)
//   0x0C CYCLES  read : cycles of the last inference
//   0x80 + 16*l  layer descriptor l, three words (see shield8_pkg):
//     +0 [31:16] in_ch  [15:0] in_len
//     +4 [31:16] out_ch [15:12] k [11] pool [10:9] precision
//        [8:6] activation [3:0] fraction bits
//     +8 [15:0] INT8 scale [20:16] shift
// The per-layer precision field is the layer-adaptive precision selection:
// each layer picks one of FP32, BF16, INT8 or FXP8.
// The descriptor table is read by the configuration prefetcher through the
// desc_idx / desc_w* port (combinational).
//
// AXI-Lite: a write is taken when address and data are both valid (both
// ready in the same cycle); the response follows one cycle later. A read is
// answered one cycle after the address. Responses are always OKAY.
// The paper says only that configuration goes over AXI-Lite; the register
// map is this design's.
module axil_regs #(
  parameter int unsigned MAX_LAYERS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  awaddr,
  input  logic        awvalid,
  output logic        awready,
  input  logic [31:0] wdata,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [7:0]  araddr,
  input  logic        arvalid,
  output logic        arready,
  output logic [31:0] rdata,
  output logic [1:0]  rresp,
  output logic        rvalid,
  input  logic        rready,
  // to the core
  output logic        start,
  output logic        clr,
  output logic [3:0]  num_layers,
  input  logic [31:0] status,
  input  logic [31:0] cycles,
  input  logic [3:0]  desc_idx,
  output logic [31:0] desc_w0,
  output logic [31:0] desc_w1,
  output logic [31:0] desc_w2
);
  logic [31:0] desc [MAX_LAYERS][3];
  logic        wr_fire, rd_fire;
  logic [1:0]  wsel, rsel;
  logic [2:0]  wl, rl;

  assign awready = awvalid && wvalid && !bvalid;
  assign wready  = awready;
  assign wr_fire = awready;
  assign arready = arvalid && !rvalid;
  assign rd_fire = arready;
  assign bresp   = 2'b00;
  assign rresp   = 2'b00;
  assign wsel    = awaddr[3:2];
  assign wl      = awaddr[6:4];
  assign rsel    = araddr[3:2];
  assign rl      = araddr[6:4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid     <= 1'b0;
      rvalid     <= 1'b0;
      rdata      <= '0;
      start      <= 1'b0;
      clr        <= 1'b0;
      num_layers <= 4'd1;
      for (int l = 0; l < int'(MAX_LAYERS); l++)
        for (int j = 0; j < 3; j++) desc[l][j] <= '0;
    end else begin
      start <= 1'b0;
      clr   <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (rvalid && rready) rvalid <= 1'b0;
      if (wr_fire) begin
        bvalid <= 1'b1;
        if (awaddr[7]) begin
          if (wsel != 2'd3 && 32'(wl) < MAX_LAYERS) desc[wl][wsel] <= wdata;
        end else begin
          case (awaddr[5:2])
            4'h0: begin
              start <= wdata[0];
              clr   <= wdata[1];
            end
            4'h2: num_layers <= wdata[3:0];
            default: ;
          endcase
        end
      end
      if (rd_fire) begin
        rvalid <= 1'b1;
        if (araddr[7])
          rdata <= (rsel != 2'd3 && 32'(rl) < MAX_LAYERS) ? desc[rl][rsel] : 32'd0;
        else begin
          case (araddr[5:2])
            4'h1: rdata <= status;
            4'h2: rdata <= {28'd0, num_layers};
            4'h3: rdata <= cycles;
            default: rdata <= 32'd0;
          endcase
        end
      end
    end
  end

  always_comb begin
    if (32'(desc_idx) < MAX_LAYERS) begin
      desc_w0 = desc[desc_idx[2:0]][0];
      desc_w1 = desc[desc_idx[2:0]][1];
      desc_w2 = desc[desc_idx[2:0]][2];
    end else begin
      desc_w0 = '0;
      desc_w1 = '0;
      desc_w2 = '0;
    end
  end

  // AXI-Lite: a response stays valid until it is accepted
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n) bvalid && !bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  rvalid && !rready |=> rvalid && $stable(rdata));
endmodule
