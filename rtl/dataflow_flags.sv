// dataflow_flags: status flags and counters of the dataflow.
//
// Collects what the host reads back through the status register:
//   busy        an inference is running
//   done        sticky, set when the last layer has finished
//   ovf         sticky, set when any result saturated in scale-and-shift
//   ovf_count   number of saturated results since the last clear
//   layer       index of the layer being executed
//   cycles      clock cycles from start to done of the last inference
// start clears done, the counters and the cycle count; clr (a host command)
// clears done and the overflow flag and count.
//
// Interface and timing: all inputs are single-cycle pulses sampled on the
// rising clock edge; outputs are registered.
// The paper names "Dataflow Flags" and "Status" blocks; the flag set is this
// design's choice.
module dataflow_flags (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        start,
  input  logic        layer_done,
  input  logic        run_done,
  input  logic        ovf_pulse,
  output logic        busy,
  output logic        done,
  output logic        ovf,
  output logic [15:0] ovf_count,
  output logic [3:0]  layer,
  output logic [31:0] cycles
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      ovf       <= 1'b0;
      ovf_count <= '0;
      layer     <= '0;
      cycles    <= '0;
    end else begin
      if (start) begin
        busy      <= 1'b1;
        done      <= 1'b0;
        ovf       <= 1'b0;
        ovf_count <= '0;
        layer     <= '0;
        cycles    <= '0;
      end else begin
        if (busy) cycles <= cycles + 32'd1;
        if (layer_done && !run_done) layer <= layer + 4'd1;
        if (run_done) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        if (clr) begin
          done      <= 1'b0;
          ovf       <= 1'b0;
          ovf_count <= '0;
        end else if (ovf_pulse) begin
          ovf <= 1'b1;
          if (ovf_count != 16'hFFFF) ovf_count <= ovf_count + 16'd1;
        end
      end
    end
  end
endmodule
