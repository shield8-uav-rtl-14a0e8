// tb_ctrl_engine: self-checking testbench of the layer-sequencing control engine.
//
// The engine is driven on its own. The testbench stands in for everything it
// controls, with simple integer models:
//   - two feature banks and a weight buffer with one cycle of read latency;
//   - a MAC that clears on mac_clr and adds fm*w on mac_en;
//   - post-processing that returns clamp(acc + bias, -128, 127) after a random
//     1..6 cycle delay;
//   - a descriptor source that answers fetch/advance after two cycles;
//   - an input stream with random gaps and an output stream that is randomly full.
// Network: a 2-channel, 9-sample, kernel-3 convolution to 3 channels with
// max-pooling by 2 (7 positions -> 3 pooled outputs), then a dense 9 -> 2
// layer. The testbench checks every stored word of both layers, the words and
// tlast flag sent to the output stream, the number of MAC cycles and that the
// MAC runs one product per cycle (each burst of mac_en is exactly one weight
// row long). It runs the network three times with fresh random data.
`timescale 1ns/1ps
module tb_ctrl_engine;
  import shield8_pkg::*;

  localparam int AW = 10, WAW = 8, NL = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           start = 0;
  logic           pf_fetch, pf_advance, pf_valid;
  layer_desc_t    cur;
  logic           last_layer;
  logic [15:0]    pool_len;
  logic [31:0]    row_len;
  logic           in_take, in_valid;
  logic [31:0]    in_data;
  logic           rd_bank, fm_re;
  logic [AW-1:0]  fm_raddr, fm_waddr;
  logic [1:0]     fm_we;
  logic [31:0]    fm_wdata;
  logic           wb_we, wb_bias_we, wb_re;
  logic [WAW-1:0] wb_waddr, wb_raddr;
  logic [31:0]    wb_wdata;
  logic           mac_clr, mac_en, post_valid, act_start, act_done;
  logic [31:0]    act_y;
  logic           out_push, out_last, out_full;
  logic [31:0]    out_data;
  logic           busy, layer_done, run_done;

  ctrl_engine #(.AW(AW), .WAW(WAW)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------- network ----------------
  int L_IN_CH [NL] = '{2, 9};
  int L_IN_LEN[NL] = '{9, 1};
  int L_OUT_CH[NL] = '{3, 2};
  int L_K     [NL] = '{3, 1};
  int L_POOL  [NL] = '{1, 0};

  function automatic int olen(int l); return L_IN_LEN[l] - L_K[l] + 1; endfunction
  function automatic int plen(int l); return L_POOL[l] ? olen(l) / 2 : olen(l); endfunction
  function automatic int clamp8(int v); return v > 127 ? 127 : (v < -128 ? -128 : v); endfunction

  // ---------------- descriptor source ----------------
  int lidx = 0, pf_wait = 0;
  always_comb begin
    cur        = '0;
    cur.in_ch  = 16'(L_IN_CH[lidx]);
    cur.in_len = 16'(L_IN_LEN[lidx]);
    cur.out_ch = 16'(L_OUT_CH[lidx]);
    cur.k      = 4'(L_K[lidx]);
    cur.pool   = 1'(L_POOL[lidx]);
    cur.prec   = PREC_INT8;
    last_layer = (lidx == NL - 1);
    pool_len   = 16'(plen(lidx));
    row_len    = 32'(L_IN_CH[lidx] * L_K[lidx]);
  end
  assign pf_valid = (pf_wait == 0);
  always @(posedge clk) begin
    if (pf_fetch) begin lidx <= 0; pf_wait <= 2; end
    else if (pf_advance) begin lidx <= lidx + 1; pf_wait <= 2; end
    else if (pf_wait > 0) pf_wait <= pf_wait - 1;
  end

  // ---------------- memories and MAC ----------------
  logic [31:0] bank [2][1 << AW];
  logic [31:0] wmem [1 << WAW];
  logic [31:0] bias = 0, fm_rd = 0, wb_rd = 0;
  int          acc = 0;
  always @(posedge clk) begin
    if (fm_we[0]) bank[0][fm_waddr] <= fm_wdata;
    if (fm_we[1]) bank[1][fm_waddr] <= fm_wdata;
    if (wb_we) wmem[wb_waddr] <= wb_wdata;
    if (wb_bias_we) bias <= wb_wdata;
    if (fm_re) fm_rd <= bank[rd_bank][fm_raddr];
    if (wb_re) wb_rd <= wmem[wb_raddr];
    if (mac_clr) acc <= 0;
    else if (mac_en) acc <= acc + $signed(fm_rd) * $signed(wb_rd);
  end

  // ---------------- post-processing ----------------
  int act_wait = 0;
  int act_val;
  assign act_done = (act_wait == 1);
  assign act_y    = 32'(act_val);
  always @(posedge clk) begin
    if (act_start) begin
      act_val  <= clamp8(acc + $signed(bias));
      act_wait <= 1 + $urandom_range(5);
    end else if (act_wait > 0) act_wait <= act_wait - 1;
  end

  // ---------------- streams ----------------
  logic [31:0] stream [$];
  logic        gap = 1'b0;
  assign in_valid = !gap && stream.size() > 0;
  assign in_data  = stream.size() > 0 ? stream[0] : 32'd0;
  always @(posedge clk) begin
    if (in_take && in_valid) void'(stream.pop_front());
    gap      <= ($urandom_range(3) == 0);
    out_full <= ($urandom_range(2) == 0);
  end
  int got [$];
  int n_last = 0;
  logic full_q = 1'b1;   // out_full as the engine saw it when it decided to push
  always @(posedge clk) full_q <= out_full;
  always @(posedge clk) if (rst_n && out_push) begin
    checks++;
    if (full_q) begin failures++; $display("push while full"); end
    got.push_back($signed(out_data));
    if (out_last) n_last++;
  end

  // ---------------- MAC rate ----------------
  int n_mac = 0, burst = 0;
  always @(posedge clk) if (rst_n) begin
    if (mac_en) begin n_mac++; burst++; end
    else if (burst != 0) begin
      checks++;
      if (burst != int'(row_len)) begin
        failures++;
        $display("MAC burst of %0d cycles, row is %0d", burst, row_len);
      end
      burst = 0;
    end
  end

  // ---------------- reference ----------------
  int x   [NL+1][$];
  int wts [NL][$];
  int bs  [NL][$];

  task automatic build();
    stream.delete();
    x[0].delete();
    for (int i = 0; i < L_IN_CH[0] * L_IN_LEN[0]; i++) begin
      x[0].push_back($urandom_range(30) - 15);
      stream.push_back(32'(x[0][i]));
    end
    for (int l = 0; l < NL; l++) begin
      wts[l].delete(); bs[l].delete(); x[l+1].delete();
      for (int oc = 0; oc < L_OUT_CH[l]; oc++) begin
        bs[l].push_back($urandom_range(40) - 20);
        stream.push_back(32'(bs[l][oc]));
        for (int j = 0; j < L_IN_CH[l] * L_K[l]; j++) begin
          wts[l].push_back($urandom_range(10) - 5);
          stream.push_back(32'(wts[l][oc * L_IN_CH[l] * L_K[l] + j]));
        end
      end
      for (int oc = 0; oc < L_OUT_CH[l]; oc++)
        for (int pp = 0; pp < plen(l); pp++) begin
          int best;
          for (int s = 0; s < (L_POOL[l] ? 2 : 1); s++) begin
            int p, sum;
            p   = L_POOL[l] ? 2 * pp + s : pp;
            sum = bs[l][oc];
            for (int ic = 0; ic < L_IN_CH[l]; ic++)
              for (int kk = 0; kk < L_K[l]; kk++)
                sum += x[l][ic * L_IN_LEN[l] + p + kk] *
                       wts[l][oc * L_IN_CH[l] * L_K[l] + ic * L_K[l] + kk];
            sum = clamp8(sum);
            if (s == 0 || sum > best) best = sum;
          end
          x[l+1].push_back(best);
        end
    end
  endtask

  // each layer's stored output is compared when the layer completes
  int lc = 0;
  always @(posedge clk) if (rst_n && layer_done) begin
    for (int i = 0; i < x[lc+1].size(); i++) begin
      checks++;
      if ($signed(bank[(lc + 1) % 2][i]) != x[lc+1][i]) begin
        failures++;
        $display("layer %0d word %0d: %0d want %0d", lc, i, $signed(bank[(lc + 1) % 2][i]), x[lc+1][i]);
      end
    end
    lc++;
  end

  initial begin
    int mac_expect, t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    mac_expect = 0;
    for (int l = 0; l < NL; l++)
      mac_expect += L_OUT_CH[l] * (L_POOL[l] ? 2 * plen(l) : plen(l)) * L_IN_CH[l] * L_K[l];
    for (int run = 0; run < 3; run++) begin
      build();
      got.delete();
      n_last = 0; n_mac = 0; lc = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++;
      if (!busy) begin failures++; $display("not busy after start"); end
      while (!run_done) @(negedge clk);
      @(negedge clk);
      checks += 4;
      if (busy) begin failures++; $display("busy after run_done"); end
      if (lc != NL) begin failures++; $display("%0d layer_done pulses", lc); end
      if (n_mac != mac_expect) begin failures++; $display("MAC cycles %0d want %0d", n_mac, mac_expect); end
      if (got.size() != x[NL].size() || n_last != 1) begin
        failures++;
        $display("%0d outputs want %0d, %0d tlast", got.size(), x[NL].size(), n_last);
      end
      for (int i = 0; i < got.size() && i < x[NL].size(); i++) begin
        checks++;
        if (got[i] != x[NL][i]) begin failures++; $display("output %0d: %0d want %0d", i, got[i], x[NL][i]); end
      end
      checks++;
      if (stream.size() != 0) begin failures++; $display("%0d stream words left", stream.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
