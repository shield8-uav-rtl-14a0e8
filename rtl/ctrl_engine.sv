// ctrl_engine: FSM-based control engine of the sequential accelerator.
//
// Runs a whole inference, layer after layer, on the one shared datapath
// (feature memory -> alignment -> MAC -> normalisation -> scale-and-shift ->
// activation -> pooling -> feature memory). For every layer:
//   for each output channel oc:
//     take 1 + in_ch*k words from the input stream: the channel's offset
//     (bias) and its weight row, into the weight buffer;
//     for each pooled position pp (or each output position without pooling):
//       for each of the 2 (or 1) convolution positions p in the pool window:
//         issue in_ch*k reads  x[ic*in_len + p + kk] and w[ic*k + kk], one
//         per cycle, the MAC adding one product per cycle;
//         run normalisation, scale-and-shift and the activation;
//       keep the maximum (max-pooling) and write it to out[oc*pool_len + pp].
// A dense layer is the same loop with in_len = 1, k = 1. Because the output
// index oc*pool_len + pp is contiguous, the last convolution's output is
// already the flattened vector the first dense layer reads.
// Before layer 0 the engine stages in_ch*in_len input words from the stream
// into bank 0. Layer l reads bank l mod 2 and writes the other bank. The
// outputs of the last layer are also sent to the output stream, the final one
// with tlast.
//
// Timing: one MAC per cycle. A convolution position costs row_len MAC cycles
// plus 4 (read latency, drain, post-processing) plus the activation latency;
// a weight row costs 1 + row_len stream cycles. Loading of a row does not
// overlap computation.
// The paper gives the layer-sequential execution on a shared datapath and
// the order conv -> ReLU -> max-pool -> dense; the loop nest, the memory
// layout (channel-major) and the row-by-row weight streaming are this
// design's choices.
module ctrl_engine
  import shield8_pkg::*;
#(
  parameter int unsigned AW  = 18,
  parameter int unsigned WAW = 14
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  // configuration prefetcher
  output logic           pf_fetch,
  output logic           pf_advance,
  input  logic           pf_valid,
  input  layer_desc_t    cur,
  input  logic           last_layer,
  input  logic [15:0]    pool_len,
  input  logic [31:0]    row_len,
  // input stream
  output logic           in_take,
  input  logic           in_valid,
  input  logic [31:0]    in_data,
  // feature memory banks
  output logic           rd_bank,
  output logic           fm_re,
  output logic [AW-1:0]  fm_raddr,
  output logic [1:0]     fm_we,
  output logic [AW-1:0]  fm_waddr,
  output logic [31:0]    fm_wdata,
  // weight buffer
  output logic           wb_we,
  output logic           wb_bias_we,
  output logic [WAW-1:0] wb_waddr,
  output logic [31:0]    wb_wdata,
  output logic           wb_re,
  output logic [WAW-1:0] wb_raddr,
  // MAC
  output logic           mac_clr,
  output logic           mac_en,
  // post-processing
  output logic           post_valid,
  output logic           act_start,
  input  logic           act_done,
  input  logic [31:0]    act_y,
  // output stream
  output logic           out_push,
  output logic [31:0]    out_data,
  output logic           out_last,
  input  logic           out_full,
  // status
  output logic           busy,
  output logic           layer_done,
  output logic           run_done
);
  typedef enum logic [3:0] {
    S_IDLE, S_PF, S_LOAD_IN, S_ROW, S_MAC, S_DRAIN, S_DRAIN2, S_POST, S_ACT, S_OUT, S_NEXT
  } state_e;
  state_e state;

  logic        first;           // S_PF: 1 before layer 0
  logic [31:0] cnt;             // stream word counter
  logic [15:0] oc, pp, ic;
  logic [3:0]  kk;
  logic [31:0] j;               // MAC index within the row
  logic [31:0] base;            // ic * in_len
  logic [15:0] p;               // convolution position
  logic        s;               // position within the pool window
  logic [31:0] pool_reg;
  logic [31:0] result;
  logic        wbank;

  assign wbank      = ~rd_bank;
  assign busy       = (state != S_IDLE);
  assign in_take    = (state == S_LOAD_IN) || (state == S_ROW);
  assign post_valid = (state == S_POST);
  assign act_start  = (state == S_POST);

  // pooled value: max of the two window positions
  always_comb begin
    if (cur.pool && s && word_gt(pool_reg, act_y, cur.prec)) result = pool_reg;
    else result = act_y;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      first      <= 1'b1;
      cnt        <= '0;
      oc         <= '0;
      pp         <= '0;
      p          <= '0;
      s          <= 1'b0;
      ic         <= '0;
      kk         <= '0;
      j          <= '0;
      base       <= '0;
      pool_reg   <= '0;
      wb_wdata   <= '0;
      rd_bank    <= 1'b0;
      pf_fetch   <= 1'b0;
      pf_advance <= 1'b0;
      fm_re      <= 1'b0;
      fm_raddr   <= '0;
      fm_we      <= '0;
      fm_waddr   <= '0;
      fm_wdata   <= '0;
      wb_we      <= 1'b0;
      wb_bias_we <= 1'b0;
      wb_waddr   <= '0;
      wb_re      <= 1'b0;
      wb_raddr   <= '0;
      mac_clr    <= 1'b0;
      mac_en     <= 1'b0;
      out_push   <= 1'b0;
      out_data   <= '0;
      out_last   <= 1'b0;
      layer_done <= 1'b0;
      run_done   <= 1'b0;
    end else begin
      pf_fetch   <= 1'b0;
      pf_advance <= 1'b0;
      fm_we      <= '0;
      wb_we      <= 1'b0;
      wb_bias_we <= 1'b0;
      mac_clr    <= 1'b0;
      out_push   <= 1'b0;
      layer_done <= 1'b0;
      run_done   <= 1'b0;
      mac_en     <= fm_re;          // data of a read issued last cycle
      fm_re      <= 1'b0;
      wb_re      <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          pf_fetch <= 1'b1;
          first    <= 1'b1;
          rd_bank  <= 1'b0;
          state    <= S_PF;
        end
        S_PF: if (pf_valid && !pf_fetch && !pf_advance) begin
          cnt   <= '0;
          oc    <= '0;
          state <= first ? S_LOAD_IN : S_ROW;
        end
        S_LOAD_IN: if (in_valid) begin
          fm_we[0] <= 1'b1;
          fm_waddr <= AW'(cnt);
          fm_wdata <= in_data;
          cnt      <= cnt + 32'd1;
          if (cnt == 32'(cur.in_ch) * 32'(cur.in_len) - 32'd1) begin
            cnt   <= '0;
            first <= 1'b0;
            state <= S_ROW;
          end
        end
        S_ROW: if (in_valid) begin
          if (cnt == 32'd0) wb_bias_we <= 1'b1;
          else begin
            wb_we    <= 1'b1;
            wb_waddr <= WAW'(cnt - 32'd1);
          end
          wb_wdata <= in_data;
          cnt <= cnt + 32'd1;
          if (cnt == row_len) begin
            cnt   <= '0;
            pp    <= '0;
            p     <= '0;
            s     <= 1'b0;
            ic    <= '0;
            kk    <= '0;
            j     <= '0;
            base  <= '0;
            state <= S_MAC;
          end
        end
        S_MAC: begin
          fm_re    <= 1'b1;
          wb_re    <= 1'b1;
          fm_raddr <= AW'(base + 32'(p) + 32'(kk));
          wb_raddr <= WAW'(j);
          if (j == 32'd0) mac_clr <= 1'b1;
          j <= j + 32'd1;
          if (kk == cur.k - 4'd1) begin
            kk   <= '0;
            ic   <= ic + 16'd1;
            base <= base + 32'(cur.in_len);
          end else kk <= kk + 4'd1;
          if (j == row_len - 32'd1) state <= S_DRAIN;
        end
        S_DRAIN:  state <= S_DRAIN2;
        S_DRAIN2: state <= S_POST;    // last product being added
        S_POST:  state <= S_ACT;     // act_start, scale-and-shift result valid
        S_ACT: if (act_done) begin
          if (cur.pool && !s) begin
            pool_reg <= act_y;
            s        <= 1'b1;
            p        <= p + 16'd1;
            ic       <= '0;
            kk       <= '0;
            j        <= '0;
            base     <= '0;
            state    <= S_MAC;
          end else begin
            fm_we[wbank] <= 1'b1;
            fm_waddr     <= AW'(32'(oc) * 32'(pool_len) + 32'(pp));
            fm_wdata     <= result;
            out_data     <= result;
            out_last     <= (oc == cur.out_ch - 16'd1) && (pp == pool_len - 16'd1);
            state        <= last_layer ? S_OUT : S_NEXT;
          end
        end
        S_OUT: if (!out_full) begin
          out_push <= 1'b1;
          state    <= S_NEXT;
        end
        S_NEXT: begin
          s    <= 1'b0;
          ic   <= '0;
          kk   <= '0;
          j    <= '0;
          base <= '0;
          if (pp == pool_len - 16'd1) begin
            pp <= '0;
            p  <= '0;
            if (oc == cur.out_ch - 16'd1) begin
              layer_done <= 1'b1;
              if (last_layer) begin
                run_done <= 1'b1;
                state    <= S_IDLE;
              end else begin
                pf_advance <= 1'b1;
                rd_bank    <= ~rd_bank;
                state      <= S_PF;
              end
            end else begin
              oc    <= oc + 16'd1;
              cnt   <= '0;
              state <= S_ROW;
            end
          end else begin
            pp    <= pp + 16'd1;
            p     <= p + 16'd1;
            state <= S_MAC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
