// tb_axis_port: pushes a numbered word sequence into the output FIFO while the
// receiver applies random back-pressure, and checks order, tlast, that the
// FIFO reports full, and that no word is lost or duplicated. On the slave
// side checks that words are passed on only while the engine takes them.
module tb_axis_port;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_tdata = 0, m_tdata, in_data, push_data = 0;
  logic s_tvalid = 0, s_tlast = 0, s_tready, m_tvalid, m_tlast, m_tready = 0;
  logic take = 0, in_valid, push = 0, push_last = 0, full;
  int checks = 0, failures = 0, sent = 0, got = 0, n_full = 0, n_in = 0;
  localparam int N = 300;

  axis_port #(.DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin
      checks++;
      if (m_tdata !== 32'(got) * 3 || m_tlast !== (got == N - 1)) begin
        failures++;
        if (failures < 10) $display("word %0d: %0d last %b", got, m_tdata, m_tlast);
      end
      got++;
    end
    if (full) n_full++;
    // slave side
    checks++;
    if (in_valid !== (s_tvalid && take) || s_tready !== take || in_data !== s_tdata) failures++;
    if (in_valid) n_in++;
  end

  always @(negedge clk) begin
    m_tready = ($urandom_range(3) == 0);
    s_tvalid = $urandom_range(1);
    s_tdata  = $urandom;
    take     = $urandom_range(1);
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // the word presented before a rising edge is taken if the FIFO is not full
    while (sent < N) begin
      logic pending;
      push = 1; push_data = 32'(sent) * 3; push_last = (sent == N - 1);
      pending = !full;
      @(negedge clk);
      if (pending) sent++;
    end
    @(negedge clk); push = 0;
    while (got < N) @(negedge clk);
    repeat (5) @(negedge clk);
    checks += 3;
    if (got != N) failures++;
    if (n_full == 0) failures++;
    if (n_in == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
