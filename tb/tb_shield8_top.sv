// tb_shield8_top: end-to-end test of the accelerator at reduced memory sizes.
//
// Programs a four-layer network over AXI-Lite and runs it twice with new
// random data each time:
//   L0 conv  1 -> 3 channels, length 12, k 3, max-pool 2, INT8, ReLU
//   L1 conv  3 -> 4 channels, length 5,  k 3, max-pool 2, FXP8, ReLU
//   L2 dense 4 -> 5,                              BF16, ReLU
//   L3 dense 5 -> 2,                              FP32, Sigmoid
// The input vector and every weight row are streamed with random gaps; the
// result stream is held off at first so the output FIFO fills. The
// testbench computes the network itself (integer and double-precision
// arithmetic, rounding to FP32/BF16 where the format requires) and compares
// every stored word of layers 0-2 exactly and the two sigmoid outputs within
// 2e-3. It also checks that the number of MAC cycles equals the number of
// multiply-accumulates of the network (one MAC per cycle), and that each
// mechanism happened: max-pooling, saturation, format change between layers,
// CORDIC activation, descriptor prefetch, input stall, output back-pressure.
module tb_shield8_top;
  import shield8_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [1:0]  bresp, rresp;
  logic [31:0] s_tdata = 0, m_tdata;
  logic        s_tvalid = 0, s_tlast = 0, s_tready, m_tvalid, m_tlast, m_tready = 0, irq;

  shield8_top #(.FM0_DEPTH(256), .FM1_DEPTH(256), .WB_DEPTH(64), .OUT_FIFO(1)) dut (
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
  int n_pool = 0, n_ovf = 0, n_cordic = 0, n_advance = 0, n_in_stall = 0, n_out_full = 0;
  int n_mac = 0, n_switch = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- network ----------------
  localparam int NL = 4;
  int    L_IN_CH [NL]  = '{1, 3, 4, 5};
  int    L_IN_LEN[NL]  = '{12, 5, 1, 1};
  int    L_OUT_CH[NL]  = '{3, 4, 5, 2};
  int    L_K     [NL]  = '{3, 3, 1, 1};
  int    L_POOL  [NL]  = '{1, 1, 0, 0};
  prec_e L_PREC  [NL]  = '{PREC_INT8, PREC_FXP8, PREC_BF16, PREC_FP32};
  act_e  L_ACT   [NL]  = '{ACT_RELU, ACT_RELU, ACT_RELU, ACT_SIGMOID};
  int    L_FRAC  [NL]  = '{4, 4, 0, 0};
  int    L_SCALE [NL]  = '{3, 1, 1, 1};
  int    L_SHIFT [NL]  = '{7, 7, 1, 0};

  // stream of words to send, and expected outputs per layer
  logic [31:0] stream [$];
  logic [31:0] act_mem [NL+1][$];   // act_mem[l]: input of layer l (stored words)
  real         final_ref [$];

  function automatic int olen(int l);
    return L_IN_LEN[l] - L_K[l] + 1;
  endfunction
  function automatic int plen(int l);
    return L_POOL[l] ? olen(l) / 2 : olen(l);
  endfunction

  // reference value of a stored word of layer l, as a real
  function automatic real val(logic [31:0] w, int l);
    case (L_PREC[l])
      PREC_FP32: return fp_to_real(w);
      PREC_BF16: return fp_to_real({w[15:0], 16'd0});
      default:   return real'($signed(w[7:0])) / pow2(L_FRAC[l]);
    endcase
  endfunction

  // word of format l holding value v (exact for the values used here)
  function automatic logic [31:0] to_fmt(real v, int l);
    longint q;
    case (L_PREC[l])
      PREC_FP32: return rnd32(v);
      PREC_BF16: return {16'd0, rnd16(v)};
      default: begin
        q = round_away(v * pow2(L_FRAC[l]));
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        return 32'(q);
      end
    endcase
  endfunction

  function automatic logic [31:0] rand_w(int l);
    case (L_PREC[l])
      PREC_FP32: return rand_fp(118, 127, $urandom_range(1) == 1);
      PREC_BF16: return {16'd0, rand_fp(118, 127, $urandom_range(1) == 1) >> 16};
      default:   return 32'($signed(8'(int'($urandom_range(80)) - 40)));
    endcase
  endfunction

  function automatic logic [31:0] rand_bias(int l);
    case (L_PREC[l])
      PREC_FP32: return rand_fp(120, 126, $urandom_range(1) == 1);
      PREC_BF16: return rand_fp(120, 126, $urandom_range(1) == 1);
      default:   return 32'(int'($urandom_range(4000)) - 2000);
    endcase
  endfunction

  // one output value before pooling: MAC, normalisation, scale & shift, activation
  function automatic logic [31:0] neuron(int l, int oc_p, logic [31:0] w [], logic [31:0] bias);
    int          p;
    longint      iacc, q;
    logic [31:0] facc, a, r;
    real         av, y;
    p    = oc_p;
    iacc = 0;
    facc = 0;
    for (int ic = 0; ic < L_IN_CH[l]; ic++)
      for (int kk = 0; kk < L_K[l]; kk++) begin
        // input word aligned from the previous layer's format
        av = val(act_mem[l][ic * L_IN_LEN[l] + p + kk], (l == 0) ? 0 : l - 1);
        a  = to_fmt(av, l);
        case (L_PREC[l])
          PREC_FP32: facc = rnd32(fp_to_real(facc) + fp_to_real(rnd32(fp_to_real(a) * fp_to_real(w[ic * L_K[l] + kk]))));
          PREC_BF16: facc = rnd32(fp_to_real(facc) + fp_to_real({a[15:0], 16'd0}) * fp_to_real({w[ic * L_K[l] + kk][15:0], 16'd0}));
          default:   iacc += longint'($signed(a[7:0])) * longint'($signed(w[ic * L_K[l] + kk][7:0]));
        endcase
      end
    case (L_PREC[l])
      PREC_FP32, PREC_BF16: begin
        y = fp_to_real(rnd32(fp_to_real(facc) + fp_to_real(bias))) / pow2(L_SHIFT[l]);
        r = (L_PREC[l] == PREC_BF16) ? {16'd0, rnd16(y)} : rnd32(y);
        if (L_ACT[l] == ACT_RELU && ((L_PREC[l] == PREC_BF16) ? r[15] : r[31])) r = 0;
      end
      default: begin
        iacc = iacc + longint'($signed(bias));
        if (L_PREC[l] == PREC_INT8) iacc = iacc * L_SCALE[l];
        q = round_away(real'(iacc) / pow2(L_SHIFT[l]));
        if (q > 127) q = 127;
        if (q < -128) q = -128;
        if (L_ACT[l] == ACT_RELU && q < 0) q = 0;
        r = 32'(q);
      end
    endcase
    return r;
  endfunction

  function automatic logic gt(logic [31:0] a, logic [31:0] b, int l);
    return val(a, l) > val(b, l);
  endfunction

  task automatic build();
    logic [31:0] w [];
    logic [31:0] bias, r0, r1;
    real         pre;
    stream.delete();
    for (int l = 0; l <= NL; l++) act_mem[l].delete();
    final_ref.delete();
    for (int i = 0; i < L_IN_CH[0] * L_IN_LEN[0]; i++) begin
      act_mem[0].push_back(32'($signed(8'($urandom))));
      stream.push_back(act_mem[0][i]);
    end
    for (int l = 0; l < NL; l++) begin
      for (int i = 0; i < L_OUT_CH[l] * plen(l); i++) act_mem[l+1].push_back(0);
      for (int oc = 0; oc < L_OUT_CH[l]; oc++) begin
        w = new[L_IN_CH[l] * L_K[l]];
        bias = rand_bias(l);
        stream.push_back(bias);
        foreach (w[i]) begin
          w[i] = rand_w(l);
          stream.push_back(w[i]);
        end
        for (int pp = 0; pp < plen(l); pp++) begin
          if (L_ACT[l] == ACT_SIGMOID) begin
            r0 = neuron(l, pp, w, bias);
            pre = fp_to_real(r0);
            final_ref.push_back(1.0 / (1.0 + $exp(-pre)));
            act_mem[l+1][oc * plen(l) + pp] = r0;
          end else if (L_POOL[l]) begin
            r0 = neuron(l, 2 * pp, w, bias);
            r1 = neuron(l, 2 * pp + 1, w, bias);
            act_mem[l+1][oc * plen(l) + pp] = gt(r0, r1, l) ? r0 : r1;
          end else act_mem[l+1][oc * plen(l) + pp] = neuron(l, pp, w, bias);
        end
      end
    end
  endtask

  // ---------------- AXI-Lite ----------------
  // the address is accepted in the cycle before the response appears, and no
  // new transfer is accepted while a response is pending
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

  // ---------------- monitors ----------------
  // Each layer's stored output is compared when the layer completes (the
  // bank is overwritten two layers later).
  int lc = 0, cur_run = 0;
  always @(posedge clk) if (rst_n && dut.u_ctrl.layer_done) begin
    if (lc < NL - 1)
      for (int i = 0; i < act_mem[lc+1].size(); i++) begin
        logic [31:0] d;
        d = ((lc + 1) % 2 == 1) ? dut.u_fm1.mem[i] : dut.u_fm0.mem[i];
        checks++;
        if (d !== act_mem[lc+1][i]) begin
          failures++;
          if (failures < 20) $display("run %0d layer %0d word %0d: %h want %h", cur_run, lc, i, d, act_mem[lc+1][i]);
        end
      end
    lc++;
  end
  real got_out [$];
  int  n_tlast = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      got_out.push_back(fp_to_real(m_tdata));
      if (m_tlast) n_tlast++;
    end
    if (dut.mac_en) n_mac++;
    if (dut.post_valid && dut.ovf) n_ovf++;
    if (dut.act_start && dut.cur.act != ACT_RELU && dut.cur.act != ACT_NONE) n_cordic++;
    if (dut.pf_advance) n_advance++;
    if (dut.in_take && !s_tvalid) n_in_stall++;
    if (dut.out_full) n_out_full++;
    if (dut.act_done && dut.cur.pool) n_pool++;
    if (dut.mac_en && dut.src_prec != dut.cur.prec) n_switch++;
  end

  initial begin
    logic [31:0] d;
    logic acc;
    int mac_expect, ovf_before;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      axil_wr(8'(8'h80 + 16 * l), {16'(L_IN_CH[l]), 16'(L_IN_LEN[l])});
      axil_wr(8'(8'h84 + 16 * l), {16'(L_OUT_CH[l]), 4'(L_K[l]), 1'(L_POOL[l]), 2'(L_PREC[l]),
                                   3'(L_ACT[l]), 2'b00, 4'(L_FRAC[l])});
      axil_wr(8'(8'h88 + 16 * l), {11'd0, 5'(L_SHIFT[l]), 16'(L_SCALE[l])});
    end
    axil_wr(8'h08, NL);
    mac_expect = 0;
    for (int l = 0; l < NL; l++)
      mac_expect += L_OUT_CH[l] * (L_POOL[l] ? 2 * plen(l) : plen(l)) * L_IN_CH[l] * L_K[l];
    for (int run = 0; run < 2; run++) begin
      build();
      got_out.delete();
      n_mac = 0;
      m_tready = 0;
      lc = 0; cur_run = run; ovf_before = n_ovf;
      axil_wr(8'h00, 32'd1);
      // stream with random gaps
      foreach (stream[i]) begin
        s_tvalid = 0;
        while ($urandom_range(2) == 0) @(negedge clk);
        s_tvalid = 1; s_tdata = stream[i]; s_tlast = (i == stream.size() - 1);
        // tready is sampled before the rising edge that completes the transfer
        do begin
          acc = s_tready;
          @(negedge clk);
        end while (!acc);
      end
      s_tvalid = 0; s_tlast = 0;
      // hold off the result stream, then accept
      repeat (300) @(negedge clk);
      m_tready = 1;
      while (!irq) @(negedge clk);
      repeat (5) @(negedge clk);
      checks++;
      if (got_out.size() != final_ref.size() || n_tlast != run + 1) begin
        failures++;
        $display("outputs %0d want %0d, tlast %0d", got_out.size(), final_ref.size(), n_tlast);
      end
      for (int i = 0; i < got_out.size() && i < final_ref.size(); i++) begin
        checks++;
        if (got_out[i] - final_ref[i] > 2.0e-3 || final_ref[i] - got_out[i] > 2.0e-3) begin
          failures++;
          $display("run %0d output %0d: %f want %f", run, i, got_out[i], final_ref[i]);
        end
      end
      checks++;
      if (n_mac != mac_expect) begin failures++; $display("MAC cycles %0d want %0d", n_mac, mac_expect); end
      axil_rd(8'h04, d);
      checks += 2;
      if (d[1:0] !== 2'b10 || d[7:4] !== 4'(NL - 1)) begin failures++; $display("status %h", d); end
      if (int'(d[31:16]) != n_ovf - ovf_before) begin
        failures++;
        $display("ovf count %0d want %0d", d[31:16], n_ovf - ovf_before);
      end
      $display("run %0d: %0d saturations", run, d[31:16]);
      axil_rd(8'h0C, d);
      $display("run %0d: %0d cycles, %0d MAC cycles", run, d, n_mac);
    end
    $display("mechanisms: pool %0d saturate %0d cordic %0d prefetch %0d in_stall %0d out_full %0d switch %0d",
             n_pool, n_ovf, n_cordic, n_advance, n_in_stall, n_out_full, n_switch);
    checks += 7;
    if (n_pool == 0) failures++;
    if (n_ovf == 0) failures++;
    if (n_cordic == 0) failures++;
    if (n_advance == 0) failures++;
    if (n_in_stall == 0) failures++;
    if (n_out_full == 0) failures++;
    if (n_switch == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
