// coarse_delay_generator -- first, coarse step of the delay: two pulses
// m system-clock periods apart.
//
// The En controller lets the 500 MHz clock through once the delay trigger
// has been seen; a pulse extractor counts that gated clock on both channels,
// channel 1 with preset 0 and channel 2 with preset m.  Channel 1 therefore
// fires on the first gated clock pulse (the starting moment T0) and channel 2
// on the m-th clock pulse after it, so
//
//   coarse_out2 rises m * T_clk after coarse_out1   (T_clk = 2 ns),
//
// both with the same logic path, so any fixed latency cancels.  Each output
// is the flip-flop Q delayed by a TAU_P_PS buffer that also clears the
// flip-flop, making a TAU_P_PS-wide pulse.  For m = 0 both outputs fire on the
// same clock pulse.  coarse_out1 starts the fast loop and coarse_out2 the slow
// loop of the fine step.
//
// The structure follows the published circuit.  The pulse width TAU_P_PS is
// this design's choice; the buffers are behavioural delay elements (a fixed
// LUT or routing delay in an FPGA).  `m` must be stable from the trigger to
// the end of the operation (the control interface latches it).
module coarse_delay_generator #(
  parameter int unsigned M_W      = vdg_pkg::M_W,
  parameter realtime     TAU_P_PS = vdg_pkg::TAU_P_PS
) (
  input  logic           clk,
  input  logic           clear,
  input  logic           delay_trigger,
  input  logic [M_W-1:0] m,
  output logic           coarse_out1,
  output logic           coarse_out2
);
  timeunit 1ps;
  timeprecision 10fs;

  logic en;
  logic gated_clk;
  logic q1, q2;

  en_controller u_en (
    .clk(clk), .clear(clear), .delay_trigger(delay_trigger), .en(en), .gated_clk(gated_clk)
  );

  pulse_extractor #(.W(M_W)) u_extract (
    .osc_a(gated_clk), .osc_b(gated_clk),
    .preset_a('0),     .preset_b(m),
    .clear(clear),
    .ff_clr_a(coarse_out1), .ff_clr_b(coarse_out2),
    .ff_q_a(q1),            .ff_q_b(q2)
  );

  delay_buffer #(.DELAY_PS(TAU_P_PS)) u_taup1 (.in(q1), .out(coarse_out1));
  delay_buffer #(.DELAY_PS(TAU_P_PS)) u_taup2 (.in(q2), .out(coarse_out2));
endmodule
