// shield8_top: sequential multi-precision 1D-CNN accelerator (whole design).
//
// One shared datapath executes every layer of the network in turn:
//
//   AXI-Stream in --> feature memory (2 banks) --> precision alignment --+
//              \--> weight buffer ------------------------------------+  |
//                                                                     v  v
//   MAC (1 per cycle, FP32/BF16/INT8/FXP8) -> normalisation -> scale & shift
//   (overflow handling) -> CORDIC activation -> max-pool -> feature memory
//                                                       \-> AXI-Stream out
//
// The host programs one descriptor per layer (shape, precision, activation,
// requantisation) over AXI-Lite, writes NLAYERS and CTRL.start, then streams
// the input vector followed, for each layer and output channel, by the
// channel's offset word and weight row. The results of the last layer come
// back on the AXI-Stream master; STATUS and CYCLES report the run.
//
// Default sizes are those of the network the paper evaluates (three
// convolutions with 512, 256 and 128 kernels of size 3, max-pool 2, a
// flattened vector of 8704 values, dense layers of 256, 128, 72 and 2):
//   FM0_DEPTH = 35328   bank 0: input, conv2 output (256 x 138), dense 1 and 3
//   FM1_DEPTH = 142336  bank 1: conv1 output (512 x 278), conv3 output (8704)
//   WB_DEPTH  = 8704    longest weight row (first dense layer)
// The bank sizes follow from an input of 558 samples, a choice of this
// design that makes the flattened size come out at the paper's 8704.
// Host processor, DRAM, AXI interconnect and DMA are outside: their
// connections are the AXI-Lite slave and the two AXI-Stream ports.
module shield8_top
  import shield8_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 8,
  parameter int unsigned FM0_DEPTH  = 35328,
  parameter int unsigned FM1_DEPTH  = 142336,
  parameter int unsigned WB_DEPTH   = 8704,
  parameter int unsigned OUT_FIFO   = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Lite configuration slave
  input  logic [7:0]  s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [7:0]  s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI-Stream slave: input vector and weights
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  input  logic        s_axis_tlast,
  output logic        s_axis_tready,
  // AXI-Stream master: results
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  // interrupt: high while the last run is done
  output logic        irq
);
  localparam int unsigned FMAX = (FM0_DEPTH > FM1_DEPTH) ? FM0_DEPTH : FM1_DEPTH;
  localparam int unsigned AW   = (FMAX > 1) ? $clog2(FMAX) : 1;
  localparam int unsigned AW0  = (FM0_DEPTH > 1) ? $clog2(FM0_DEPTH) : 1;
  localparam int unsigned AW1  = (FM1_DEPTH > 1) ? $clog2(FM1_DEPTH) : 1;
  localparam int unsigned WAW  = (WB_DEPTH > 1) ? $clog2(WB_DEPTH) : 1;

  // configuration
  logic        start, clr;
  logic [3:0]  num_layers, desc_idx;
  logic [31:0] desc_w0, desc_w1, desc_w2, status, cycles;
  layer_desc_t cur;
  logic [3:0]  cur_layer;
  logic        last_layer, pf_fetch, pf_advance, pf_valid;
  prec_e       src_prec;
  logic [3:0]  src_frac;
  logic [15:0] out_len, pool_len;
  logic [31:0] row_len;

  // flags
  logic        f_busy, f_done, f_ovf;
  logic [15:0] f_ovf_count;
  logic [3:0]  f_layer;

  // stream
  logic        in_take, in_valid, out_push, out_last, out_full;
  logic [31:0] in_data, out_data;

  // memories and datapath
  logic           rd_bank, rd_bank_q, fm_re, wb_we, wb_bias_we, wb_re;
  logic [1:0]     fm_we;
  logic [AW-1:0]  fm_raddr, fm_waddr;
  logic [31:0]    fm_wdata, fm0_rdata, fm1_rdata, fm_rdata, a_aligned;
  logic [WAW-1:0] wb_waddr, wb_raddr;
  logic [31:0]    wb_wdata, wb_rdata, wb_bias;
  logic           mac_clr, mac_en;
  logic [31:0]    acc, normed, scaled, act_y;
  logic           ovf, post_valid, act_start, act_done, act_busy;
  logic           e_busy, layer_done, run_done;

  axil_regs #(.MAX_LAYERS(MAX_LAYERS)) u_regs (
    .clk, .rst_n,
    .awaddr(s_axil_awaddr), .awvalid(s_axil_awvalid), .awready(s_axil_awready),
    .wdata(s_axil_wdata), .wvalid(s_axil_wvalid), .wready(s_axil_wready),
    .bresp(s_axil_bresp), .bvalid(s_axil_bvalid), .bready(s_axil_bready),
    .araddr(s_axil_araddr), .arvalid(s_axil_arvalid), .arready(s_axil_arready),
    .rdata(s_axil_rdata), .rresp(s_axil_rresp), .rvalid(s_axil_rvalid), .rready(s_axil_rready),
    .start, .clr, .num_layers, .status, .cycles,
    .desc_idx, .desc_w0, .desc_w1, .desc_w2
  );

  assign status = {f_ovf_count, 8'd0, f_layer, 1'b0, f_ovf, f_done, f_busy};
  assign irq    = f_done;

  cfg_prefetch u_pf (
    .clk, .rst_n, .fetch(pf_fetch), .advance(pf_advance), .num_layers,
    .idx(desc_idx), .w0(desc_w0), .w1(desc_w1), .w2(desc_w2),
    .cur, .cur_layer, .last_layer, .src_prec, .src_frac,
    .out_len, .pool_len, .row_len, .valid(pf_valid)
  );

  dataflow_flags u_flags (
    .clk, .rst_n, .clr, .start(start && !e_busy), .layer_done, .run_done,
    .ovf_pulse(ovf && post_valid),
    .busy(f_busy), .done(f_done), .ovf(f_ovf), .ovf_count(f_ovf_count),
    .layer(f_layer), .cycles
  );

  axis_port #(.DEPTH(OUT_FIFO)) u_axis (
    .clk, .rst_n,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tlast(s_axis_tlast),
    .s_tready(s_axis_tready),
    .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid), .m_tlast(m_axis_tlast),
    .m_tready(m_axis_tready),
    .take(in_take), .in_valid, .in_data,
    .push(out_push), .push_data(out_data), .push_last(out_last), .full(out_full)
  );

  ctrl_engine #(.AW(AW), .WAW(WAW)) u_ctrl (
    .clk, .rst_n, .start,
    .pf_fetch, .pf_advance, .pf_valid, .cur, .last_layer, .pool_len, .row_len,
    .in_take, .in_valid, .in_data,
    .rd_bank, .fm_re, .fm_raddr, .fm_we, .fm_waddr, .fm_wdata,
    .wb_we, .wb_bias_we, .wb_waddr, .wb_wdata, .wb_re, .wb_raddr,
    .mac_clr, .mac_en, .post_valid, .act_start, .act_done, .act_y,
    .out_push, .out_data, .out_last, .out_full,
    .busy(e_busy), .layer_done, .run_done
  );

  feature_mem #(.DEPTH(FM0_DEPTH)) u_fm0 (
    .clk, .we(fm_we[0]), .waddr(fm_waddr[AW0-1:0]), .wdata(fm_wdata),
    .re(fm_re && !rd_bank), .raddr(fm_raddr[AW0-1:0]), .rdata(fm0_rdata)
  );

  feature_mem #(.DEPTH(FM1_DEPTH)) u_fm1 (
    .clk, .we(fm_we[1]), .waddr(fm_waddr[AW1-1:0]), .wdata(fm_wdata),
    .re(fm_re && rd_bank), .raddr(fm_raddr[AW1-1:0]), .rdata(fm1_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_bank_q <= 1'b0;
    else        rd_bank_q <= rd_bank;
  end
  assign fm_rdata = rd_bank_q ? fm1_rdata : fm0_rdata;

  weight_buf #(.DEPTH(WB_DEPTH)) u_wb (
    .clk, .we(wb_we), .waddr(wb_waddr), .wdata(wb_wdata), .bias_we(wb_bias_we),
    .re(wb_re), .raddr(wb_raddr), .rdata(wb_rdata), .bias(wb_bias)
  );

  fmt_align u_align (
    .src_prec, .src_frac, .dst_prec(cur.prec), .dst_frac(cur.frac),
    .din(fm_rdata), .dout(a_aligned)
  );

  mp_mac u_mac (
    .clk, .rst_n, .prec(cur.prec), .clr(mac_clr), .init(32'd0), .en(mac_en),
    .a(a_aligned), .w(wb_rdata), .acc
  );

  norm_unit u_norm (.prec(cur.prec), .acc, .offset(wb_bias), .y(normed));

  scale_shift u_ss (
    .prec(cur.prec), .scale(cur.scale), .shift(cur.shift), .x(normed), .y(scaled), .ovf
  );

  act_cordic u_act (
    .clk, .rst_n, .start(act_start), .act(cur.act), .prec(cur.prec), .frac(cur.frac),
    .x(scaled), .x2(32'd0), .busy(act_busy), .done(act_done), .y(act_y)
  );
endmodule
