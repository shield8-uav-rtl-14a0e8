// tb_dataflow_flags: drives random start, layer, overflow, clear and done
// pulses and checks every flag and counter against a model kept in the
// testbench.
module tb_dataflow_flags;
  logic clk = 0, rst_n = 0, clr = 0, start = 0, layer_done = 0, run_done = 0, ovf_pulse = 0;
  logic busy, done, ovf;
  logic [15:0] ovf_count;
  logic [3:0] layer;
  logic [31:0] cycles;
  logic m_busy = 0, m_done = 0, m_ovf = 0;
  int m_cnt = 0, m_layer = 0, m_cycles = 0;
  int checks = 0, failures = 0;

  dataflow_flags dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      checks++;
      if (busy !== m_busy || done !== m_done || ovf !== m_ovf || ovf_count !== 16'(m_cnt) ||
          layer !== 4'(m_layer) || cycles !== 32'(m_cycles)) begin
        failures++;
        if (failures < 10) $display("n=%0d busy %b/%b done %b/%b ovf %b/%b cnt %0d/%0d layer %0d/%0d cyc %0d/%0d",
          n, busy, m_busy, done, m_done, ovf, m_ovf, ovf_count, m_cnt, layer, m_layer, cycles, m_cycles);
      end
      start      = ($urandom_range(200) == 0);
      clr        = ($urandom_range(100) == 0);
      layer_done = ($urandom_range(20) == 0);
      run_done   = layer_done && ($urandom_range(4) == 0);
      ovf_pulse  = ($urandom_range(5) == 0);
      // model of the next state
      @(posedge clk);
      if (start) begin
        m_busy = 1; m_done = 0; m_ovf = 0; m_cnt = 0; m_layer = 0; m_cycles = 0;
      end else begin
        if (m_busy) m_cycles++;
        if (layer_done && !run_done) m_layer = (m_layer + 1) % 16;
        if (run_done) begin m_busy = 0; m_done = 1; end
        if (clr) begin m_done = 0; m_ovf = 0; m_cnt = 0; end
        else if (ovf_pulse) begin m_ovf = 1; m_cnt++; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
