// axis_port: AXI-Stream side of the accelerator.
//
// Slave side: inputs and weights arrive from the host's DMA as 32-bit words.
// The control engine says when it can take a word (take); a word is consumed
// on a cycle where s_tvalid and s_tready are both high and is handed to the
// engine as in_valid/in_data in the same cycle (no buffering, tready follows
// take combinationally). s_tlast is accepted and ignored: the engine knows
// from the layer descriptors how many words to expect.
// Master side: results pushed by the engine go through a small FIFO
// (DEPTH words) to m_tdata/m_tvalid/m_tlast, so a host that is slow to
// accept stalls the engine only when the FIFO is full (full).
//
// Timing: a pushed word can appear on m_tdata in the next cycle.
// The paper says data moves over AXI-DMA/Stream; the FIFO and its depth are
// this design's choice. Handshake rules (AXI4-Stream) are checked by
// assertions: once m_tvalid is high it stays high, with stable data, until
// m_tready.
module axis_port #(
  parameter int unsigned DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI-Stream slave
  input  logic [31:0] s_tdata,
  input  logic        s_tvalid,
  input  logic        s_tlast,
  output logic        s_tready,
  // AXI-Stream master
  output logic [31:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  // engine side
  input  logic        take,
  output logic        in_valid,
  output logic [31:0] in_data,
  input  logic        push,
  input  logic [31:0] push_data,
  input  logic        push_last,
  output logic        full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [32:0]  fifo [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;
  logic          pop, do_push;

  assign s_tready = take;
  assign in_valid = s_tvalid && take;
  assign in_data  = s_tdata;

  assign full     = (cnt == (PW+1)'(DEPTH));
  assign m_tvalid = (cnt != '0);
  assign {m_tlast, m_tdata} = fifo[rp];
  assign pop      = m_tvalid && m_tready;
  assign do_push  = push && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (do_push) begin
        wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (pop) begin
        rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      end
      cnt <= cnt + (PW+1)'(do_push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) fifo[wp] <= {push_last, push_data};
  end

  // AXI4-Stream: valid may not drop, nor data change, before the transfer
  a_tvalid_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule
