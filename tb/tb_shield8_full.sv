// tb_shield8_full: one complete inference through the accelerator at its
// default sizes (no parameter overrides).
//
// The network is the full 1D feature CNN the memories are sized for, all in
// INT8:
//   conv 1 -> 512, length 558, k 3, ReLU, max-pool 2   (556 -> 278)
//   conv 512 -> 256, length 278, k 3, ReLU, max-pool 2 (276 -> 138)
//   conv 256 -> 128, length 138, k 3, ReLU, max-pool 2 (136 -> 68)
//   dense 8704 -> 256 -> 128 -> 72, ReLU
//   dense 72 -> 2, Sigmoid
// about 125 million multiply-accumulates. The descriptors are written over
// AXI-Lite, then the input and all weight rows are streamed at full rate.
// Weights are random in [-2, 2], inputs in [-64, 63], biases in [-40, 40];
// the requantisation shifts keep the activations away from constant
// saturation, and the last two layers use 2 and 4 fraction bits so that the
// alignment stage rescales between layers.
// The testbench computes the network in integer arithmetic and checks every
// stored word of layers 0-5 when the layer completes, the two sigmoid
// outputs to within one LSB, that the MAC ran exactly once per
// multiply-accumulate, and that the whole run takes no more than 5% more
// cycles than the multiply-accumulates themselves (the streaming of weight
// rows and the per-output post-processing are the overhead).
module tb_shield8_full;
  import shield8_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic [31:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tlast, s_tready, m_tvalid, m_tlast, irq;
  logic        m_tready = 1;

  shield8_top dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tlast(s_tlast), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast), .m_axis_tready(m_tready),
    .irq
  );
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network ----------------
  localparam int NL = 7;
  int L_IN_CH [NL] = '{1, 512, 256, 8704, 256, 128, 72};
  int L_IN_LEN[NL] = '{558, 278, 138, 1, 1, 1, 1};
  int L_OUT_CH[NL] = '{512, 256, 128, 256, 128, 72, 2};
  int L_K     [NL] = '{3, 3, 3, 1, 1, 1, 1};
  int L_POOL  [NL] = '{1, 1, 1, 0, 0, 0, 0};
  int L_ACT   [NL] = '{1, 1, 1, 1, 1, 1, 2};   // ReLU ... Sigmoid
  int L_FRAC  [NL] = '{0, 0, 0, 0, 0, 2, 4};
  int L_SHIFT [NL] = '{1, 5, 4, 6, 4, 4, 5};

  function automatic int olen(int l); return L_IN_LEN[l] - L_K[l] + 1; endfunction
  function automatic int plen(int l); return L_POOL[l] ? olen(l) / 2 : olen(l); endfunction
  function automatic int sat8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction
  function automatic int rshift_round(longint v, int s);
    longint r;
    if (s == 0) return int'(v);
    r = longint'(1) <<< (s - 1);
    return (v < 0) ? -int'((-v + r) >>> s) : int'((v + r) >>> s);
  endfunction

  // ---------------- stimulus and reference ----------------
  int          stream [];        // input words then, per layer and channel, bias and row
  int          row_at [NL];      // stream index of layer l's first bias
  int          x [NL+1][];       // activations; x[0] is the input
  int          nwords;

  task automatic build();
    int n;
    n = L_IN_CH[0] * L_IN_LEN[0];
    for (int l = 0; l < NL; l++) begin
      row_at[l] = n;
      n += L_OUT_CH[l] * (1 + L_IN_CH[l] * L_K[l]);
    end
    nwords = n;
    stream = new[n];
    for (int i = 0; i < L_IN_CH[0] * L_IN_LEN[0]; i++) stream[i] = int'($urandom_range(127)) - 64;
    for (int l = 0; l < NL; l++) begin
      int rl = L_IN_CH[l] * L_K[l];
      for (int oc = 0; oc < L_OUT_CH[l]; oc++) begin
        int b = row_at[l] + oc * (1 + rl);
        stream[b] = int'($urandom_range(80)) - 40;
        for (int j = 0; j < rl; j++) stream[b + 1 + j] = int'($urandom_range(4)) - 2;
      end
    end
    x[0] = new[L_IN_CH[0] * L_IN_LEN[0]];
    for (int i = 0; i < x[0].size(); i++) x[0][i] = stream[i];
    for (int l = 0; l < NL; l++) begin
      int rl = L_IN_CH[l] * L_K[l];
      int sf = (l == 0) ? L_FRAC[0] : L_FRAC[l-1];
      int a [];
      // precision alignment: only left shifts (more fraction bits) occur here
      a = new[x[l].size()];
      for (int i = 0; i < a.size(); i++) a[i] = sat8(x[l][i] <<< (L_FRAC[l] - sf));
      x[l+1] = new[L_OUT_CH[l] * plen(l)];
      for (int oc = 0; oc < L_OUT_CH[l]; oc++) begin
        int b = row_at[l] + oc * (1 + rl);
        for (int pp = 0; pp < plen(l); pp++) begin
          int best;
          for (int s = 0; s < (L_POOL[l] ? 2 : 1); s++) begin
            int p, acc, q;
            p   = L_POOL[l] ? 2 * pp + s : pp;
            acc = 0;
            for (int ic = 0; ic < L_IN_CH[l]; ic++)
              for (int kk = 0; kk < L_K[l]; kk++)
                acc += a[ic * L_IN_LEN[l] + p + kk] * stream[b + 1 + ic * L_K[l] + kk];
            q = sat8(rshift_round(longint'(acc) + longint'(stream[b]), L_SHIFT[l]));
            if (L_ACT[l] == 1) q = (q < 0) ? 0 : q;
            else q = int'($floor(16.0 / (1.0 + $exp(-real'(q) / 16.0)) + 0.5));
            if (s == 0 || q > best) best = q;
          end
          x[l+1][oc * plen(l) + pp] = best;
        end
      end
    end
  endtask

  // ---------------- input stream at full rate ----------------
  int sidx = 0;
  assign s_tvalid = rst_n && go && sidx < nwords;
  assign s_tdata  = (sidx < nwords) ? 32'(stream[sidx]) : 32'd0;
  assign s_tlast  = (sidx == nwords - 1);
  logic go = 1'b0;
  always @(posedge clk) if (s_tvalid && s_tready) sidx <= sidx + 1;

  // ---------------- monitors ----------------
  longint n_mac = 0;
  int     lc = 0;
  int     got [$];
  always @(posedge clk) if (rst_n) begin
    if (dut.mac_en) n_mac++;
    if (m_tvalid && m_tready) got.push_back($signed(m_tdata));
  end
  // each layer's stored output is compared when the layer completes
  always @(posedge clk) if (rst_n && dut.u_ctrl.layer_done) begin
    if (lc < NL - 1) begin
      int bad = 0;
      for (int i = 0; i < x[lc+1].size(); i++) begin
        logic [31:0] d;
        d = ((lc + 1) % 2 == 1) ? dut.u_fm1.mem[i] : dut.u_fm0.mem[i];
        checks++;
        if (d !== 32'(x[lc+1][i])) begin
          failures++;
          bad++;
          if (bad < 5) $display("layer %0d word %0d: %h want %h", lc, i, d, 32'(x[lc+1][i]));
        end
      end
    end
    $display("layer %0d done at cycle %0d", lc, dut.cycles);
    lc++;
  end

  // ---------------- AXI-Lite ----------------
  task automatic axil_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(negedge clk); while (!bvalid);
    awvalid = 0; wvalid = 0; bready = 1;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axil_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(negedge clk); while (!rvalid);
    arvalid = 0; rready = 1;
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] d, cyc;
    longint mac_expect;
    build();
    mac_expect = 0;
    for (int l = 0; l < NL; l++)
      mac_expect += longint'(L_OUT_CH[l]) * (L_POOL[l] ? 2 * plen(l) : plen(l)) * L_IN_CH[l] * L_K[l];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      axil_wr(8'(8'h80 + 16 * l), {16'(L_IN_CH[l]), 16'(L_IN_LEN[l])});
      axil_wr(8'(8'h84 + 16 * l), {16'(L_OUT_CH[l]), 4'(L_K[l]), 1'(L_POOL[l]), 2'(PREC_INT8),
                                   3'(L_ACT[l]), 2'b00, 4'(L_FRAC[l])});
      axil_wr(8'(8'h88 + 16 * l), {11'd0, 5'(L_SHIFT[l]), 16'd1});
    end
    axil_wr(8'h08, NL);
    axil_wr(8'h00, 32'd1);
    go = 1'b1;
    while (!irq) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 4;
    if (lc != NL) begin failures++; $display("%0d layers completed", lc); end
    if (sidx != nwords) begin failures++; $display("%0d of %0d stream words taken", sidx, nwords); end
    if (n_mac != mac_expect) begin failures++; $display("MAC cycles %0d want %0d", n_mac, mac_expect); end
    if (got.size() != 2) begin failures++; $display("%0d outputs", got.size()); end
    for (int i = 0; i < got.size() && i < 2; i++) begin
      checks++;
      if (got[i] - x[NL][i] > 1 || x[NL][i] - got[i] > 1) begin
        failures++;
        $display("output %0d: %0d want %0d", i, got[i], x[NL][i]);
      end
    end
    axil_rd(8'h0C, cyc);
    axil_rd(8'h04, d);
    checks += 2;
    if (d[1:0] !== 2'b10) begin failures++; $display("status %h", d); end
    if (longint'(cyc) > mac_expect + mac_expect / 20) begin
      failures++;
      $display("%0d cycles for %0d MACs", cyc, mac_expect);
    end
    $display("%0d stream words, %0d MACs, %0d cycles (%0.3f cycles per MAC), %0d saturations, outputs %0d %0d (/16)",
             nwords, mac_expect, cyc, real'(cyc) / real'(mac_expect), d[31:16], got[0], got[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
