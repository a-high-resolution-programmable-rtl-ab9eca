// pulse_extractor_ch -- one channel of the pulse extractor.
//
// Counts the pulses of `osc` and lets exactly the pulse whose 0-based index
// equals `preset` through to a D flip-flop (D tied high), whose Q starts the
// output pulse.  The counter advances on the falling edge of `osc`, so the
// comparator, which drives the 2:1 multiplexer select, only changes while
// `osc` is low: the multiplexer (input 0 ground, input 1 `osc`) then passes
// one whole pulse, and the flip-flop sees a single clean rising edge.  With
// preset 0 the comparator is true straight after clear and the first pulse is
// taken.  The counter is one bit wider than the preset and stops once it has
// passed it, so a sequence that runs on until the next clear never wraps
// round to a second match.
//
// The flip-flop is cleared by `ff_clr`, which the parent drives from Q through
// a fixed delay buffer (that buffer sets the output pulse width), and by
// `clear`.  Counter, comparator, multiplexer and flip-flop are as published;
// the counting edge, the stop and the reset by `clear` of the flip-flop are
// this design's choices.  The registers start cleared, as FPGA registers do
// after configuration.
module pulse_extractor_ch #(
  parameter int unsigned W = 6
) (
  input  logic         osc,
  input  logic [W-1:0] preset,
  input  logic         clear,
  input  logic         ff_clr,
  output logic         ff_q = 1'b0
);
  timeunit 1ps;
  timeprecision 10fs;

  logic [W:0] count = '0;  // FPGA registers power up cleared
  logic       match;
  logic       ff_clk;
  logic       ff_rst;

  always_ff @(negedge osc or posedge clear) begin
    if (clear)                       count <= '0;
    else if (count <= {1'b0, preset}) count <= count + 1'b1;
  end

  assign match  = (count == {1'b0, preset});
  assign ff_clk = match ? osc : 1'b0;
  assign ff_rst = ff_clr | clear;

  always_ff @(posedge ff_clk or posedge ff_rst) begin
    if (ff_rst) ff_q <= 1'b0;
    else        ff_q <= 1'b1;
  end
endmodule
