// tb_cfg_prefetch: serves a random descriptor table, fetches layer 0 and
// advances through all layers, checking the decoded descriptor, the derived
// loop bounds, the source format, last_layer and the valid timing.
module tb_cfg_prefetch;
  import shield8_pkg::*;
  logic clk = 0, rst_n = 0, fetch = 0, advance = 0;
  logic [3:0] num_layers = 6, idx;
  logic [31:0] w0, w1, w2;
  layer_desc_t cur;
  logic [3:0] cur_layer, src_frac;
  logic last_layer, valid;
  prec_e src_prec;
  logic [15:0] out_len, pool_len;
  logic [31:0] row_len;
  logic [31:0] tab [8][3];
  int checks = 0, failures = 0;

  cfg_prefetch dut (.*);
  always #5 clk = ~clk;
  assign w0 = tab[idx[2:0]][0];
  assign w1 = tab[idx[2:0]][1];
  assign w2 = tab[idx[2:0]][2];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      for (int l = 0; l < 8; l++) begin
        int inl, k;
        k = 1 + int'($urandom_range(4));
        inl = k + int'($urandom_range(600));
        tab[l][0] = {16'($urandom_range(1, 600)), 16'(inl)};
        tab[l][1] = {16'($urandom_range(1, 600)), 4'(k), 1'($urandom), 11'($urandom) & 11'h7CF};
        tab[l][2] = $urandom;
      end
      num_layers = 4'($urandom_range(1, 8));
      @(negedge clk); fetch = 1;
      @(negedge clk); fetch = 0;
      @(negedge clk);
      checks++;
      if (valid) failures++;
      @(negedge clk);
      checks++;
      if (!valid) failures++;
      for (int l = 0; l < int'(num_layers); l++) begin
        int ol, pl;
        checks += 8;
        ol = int'(tab[l][0][15:0]) - int'(tab[l][1][15:12]) + 1;
        pl = tab[l][1][11] ? ol / 2 : ol;
        if (cur.in_len !== tab[l][0][15:0] || cur.in_ch !== tab[l][0][31:16]) failures++;
        if (cur.out_ch !== tab[l][1][31:16] || cur.k !== tab[l][1][15:12] || cur.pool !== tab[l][1][11]) failures++;
        if (cur.prec !== prec_e'(tab[l][1][10:9]) || cur.act !== act_e'(tab[l][1][8:6]) ||
            cur.frac !== tab[l][1][3:0]) failures++;
        if (cur.scale !== tab[l][2][15:0] || cur.shift !== tab[l][2][20:16]) failures++;
        if (out_len !== 16'(ol) || pool_len !== 16'(pl)) begin
          failures++; $display("layer %0d out_len %0d/%0d pool %0d/%0d", l, out_len, ol, pool_len, pl);
        end
        if (row_len !== 32'(tab[l][0][31:16]) * 32'(tab[l][1][15:12])) failures++;
        if (src_prec !== prec_e'(tab[(l == 0) ? 0 : l - 1][1][10:9]) ||
            src_frac !== tab[(l == 0) ? 0 : l - 1][1][3:0]) failures++;
        if (last_layer !== (l == int'(num_layers) - 1)) failures++;
        repeat ($urandom_range(5)) @(negedge clk);
        if (l != int'(num_layers) - 1) begin
          advance = 1;
          @(negedge clk); advance = 0;
          checks += 2;
          if (valid) failures++;
          @(negedge clk);
          if (!valid) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
