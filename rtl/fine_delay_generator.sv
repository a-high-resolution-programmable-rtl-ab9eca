// fine_delay_generator -- second, fine step of the delay.
//
// The Vernier delay loop turns the two coarse pulses into two oscillations
// with lap times T_f (fast) and T_s (slow).  A pulse extractor with both
// presets equal to n takes oscillation pulse n (counting from 0) of each:
// the fast one is the leading output, the slow one the lagging output.  With
// the coarse pulses m * T_clk apart the outputs are
//
//   lagging - leading = m * T_clk + n * (T_s - T_f) + offset,
//
// where the constant offset is the extra first-pass delay of the longer loop
// (one r_f with the default loops).  Each output is a TAU_P_PS-wide pulse from
// a self-clearing flip-flop, like the coarse outputs.  The slow loop finishes
// n * T_s after it starts: the dead time, 208 ns at n = 52.
//
// The structure follows the published circuit; TAU_P_PS is this design's
// choice and the TAU_P buffers are behavioural delay elements.
module fine_delay_generator #(
  parameter int unsigned N_W      = vdg_pkg::N_W,
  parameter int unsigned P_DU     = vdg_pkg::P_DU,
  parameter int unsigned Q_DU     = vdg_pkg::Q_DU,
  parameter realtime     TAU_P_PS = vdg_pkg::TAU_P_PS
) (
  input  logic           coarse_out1,
  input  logic           coarse_out2,
  input  logic           clear,
  input  logic [N_W-1:0] n,
  output logic           leading,
  output logic           lagging,
  output logic           fast_osc,
  output logic           slow_osc
);
  timeunit 1ps;
  timeprecision 10fs;

  logic q_lead, q_lag;

  vernier_delay_loop #(.P_DU(P_DU), .Q_DU(Q_DU)) u_loops (
    .start_fast(coarse_out1), .start_slow(coarse_out2), .clear(clear),
    .fast_osc(fast_osc), .slow_osc(slow_osc)
  );

  pulse_extractor #(.W(N_W)) u_extract (
    .osc_a(fast_osc), .osc_b(slow_osc),
    .preset_a(n),     .preset_b(n),
    .clear(clear),
    .ff_clr_a(leading), .ff_clr_b(lagging),
    .ff_q_a(q_lead),    .ff_q_b(q_lag)
  );

  delay_buffer #(.DELAY_PS(TAU_P_PS)) u_taup_lead (.in(q_lead), .out(leading));
  delay_buffer #(.DELAY_PS(TAU_P_PS)) u_taup_lag  (.in(q_lag),  .out(lagging));
endmodule
