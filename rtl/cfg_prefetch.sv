// cfg_prefetch: configuration prefetcher (layer metadata decoder).
//
// Keeps the descriptor of the running layer decoded in registers and fetches
// the descriptor of the next layer from the configuration table while the
// current one runs, so switching layers costs no table access. For the
// running layer it also derives the loop bounds the control engine needs:
//   out_len  = in_len - k + 1            (valid convolution)
//   pool_len = pool ? out_len / 2 : out_len
//   row_len  = in_ch * k                 (weights per output channel)
// and reports the format of the layer that produced its input (src_prec,
// src_frac): the previous layer's, or the layer's own for layer 0.
//
// Interface: fetch (pulse) loads layer 0 and prefetches layer 1; advance
// (pulse) moves the prefetched layer into the current slot and fetches the
// one after. valid is high when cur and its derived values are ready and the
// following descriptor has been prefetched: two cycles after fetch or
// advance. advance is only honoured while valid is high. The table is read through
// idx / w0..w2 (combinational).
// The paper says a prefetcher interprets layer metadata and updates execution
// parameters at runtime; the two-slot scheme is this design's choice.
module cfg_prefetch
  import shield8_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fetch,
  input  logic        advance,
  input  logic [3:0]  num_layers,
  output logic [3:0]  idx,
  input  logic [31:0] w0,
  input  logic [31:0] w1,
  input  logic [31:0] w2,
  output layer_desc_t cur,
  output logic [3:0]  cur_layer,
  output logic        last_layer,
  output prec_e       src_prec,
  output logic [3:0]  src_frac,
  output logic [15:0] out_len,
  output logic [15:0] pool_len,
  output logic [31:0] row_len,
  output logic        valid
);
  layer_desc_t nxt, dec;
  logic [1:0]  phase;   // 2: fetch layer 0, 1: fetch next

  always_comb begin
    dec.in_len = w0[15:0];
    dec.in_ch  = w0[31:16];
    dec.out_ch = w1[31:16];
    dec.k      = w1[15:12];
    dec.pool   = w1[11];
    dec.prec   = prec_e'(w1[10:9]);
    dec.act    = act_e'(w1[8:6]);
    dec.frac   = w1[3:0];
    dec.scale  = w2[15:0];
    dec.shift  = w2[20:16];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur       <= '0;
      nxt       <= '0;
      idx       <= '0;
      cur_layer <= '0;
      phase     <= '0;
      valid     <= 1'b0;
      src_prec  <= PREC_FP32;
      src_frac  <= '0;
    end else begin
      if (fetch) begin
        idx       <= '0;
        cur_layer <= '0;
        phase     <= 2'd2;
        valid     <= 1'b0;
      end else if (advance && valid) begin
        src_prec  <= cur.prec;
        src_frac  <= cur.frac;
        cur       <= nxt;
        cur_layer <= cur_layer + 4'd1;
        idx       <= idx + 4'd1;
        phase     <= 2'd1;
        valid     <= 1'b0;
      end else if (phase == 2'd2) begin
        cur      <= dec;
        src_prec <= dec.prec;
        src_frac <= dec.frac;
        idx      <= idx + 4'd1;
        phase    <= 2'd1;
      end else if (phase == 2'd1) begin
        nxt   <= dec;
        phase <= 2'd0;
        valid <= 1'b1;
      end
    end
  end

  assign last_layer = (cur_layer == num_layers - 4'd1);
  assign out_len    = cur.in_len - 16'(cur.k) + 16'd1;
  assign pool_len   = cur.pool ? (out_len >> 1) : out_len;
  assign row_len    = 32'(cur.in_ch) * 32'(cur.k);
endmodule
