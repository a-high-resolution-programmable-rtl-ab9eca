// en_controller -- enables the 500 MHz clock into the coarse pulse extractor.
//
// `en` goes high once the delay trigger is seen and stays high until `clear`.
// A 2:1 multiplexer (input 0 ground, input 1 the clock, select `en`) gives
// `gated_clk`, the clock sequence whose pulses the coarse pulse extractor
// counts.  En is sampled on the falling clock edge, so the multiplexer only
// switches while the clock is low and `gated_clk` starts with a whole clock
// pulse: with the trigger high in the cycle after rising edge k, the first
// gated pulse is rising edge k+1, the starting moment T0.
//
// The block and the multiplexer are as published; sampling on the falling
// edge and the asynchronous, active-high `clear` are this design's choices.
// En starts low, as FPGA registers do after configuration.
module en_controller (
  input  logic clk,
  input  logic clear,
  input  logic delay_trigger,
  output logic en = 1'b0,
  output logic gated_clk
);
  timeunit 1ps;
  timeprecision 10fs;

  always_ff @(negedge clk or posedge clear) begin
    if (clear)              en <= 1'b0;
    else if (delay_trigger) en <= 1'b1;
  end

  assign gated_clk = en ? clk : 1'b0;
endmodule
