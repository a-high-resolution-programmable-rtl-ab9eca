// vernier_delay_loop -- the two oscillator loops of the fine delay step.
//
// Behavioural model.  Two delay_loop instances built from the same structure
// and differing only in length: the fast loop has P_DU carry-chain delay units,
// the slow loop Q_DU.  Their lap times T_f and T_s differ by
//
//   r_f = T_s - T_f = (Q_DU - P_DU) * T_DU,
//
// the fine resolution: after n laps the slow loop has fallen n * r_f further
// behind the fast one.  With the defaults (31 and 32 DUs of 38.6 ps, 2 ns
// reshaped pulses) T_f = 4046.6 ps, T_s = 4085.2 ps and r_f = 38.6 ps.  The
// fast loop is started by coarse delay output 1, the slow loop by output 2;
// `clear` opens both.  Each loop's first pulse also passes its whole DU chain,
// so the slow loop's first pulse trails by one extra r_f: that constant
// offset is part of every delay this generator produces.
//
// The loop structure, the 32-DU maximum and T_p = 2 ns follow the prototype.
// In the prototype the two loop lengths were found by trimming the longer
// loop one DU at a time until the measured resolution was reached; here they
// are the parameters P_DU and Q_DU.  As in the prototype, both loops hold
// the same SEED_DU-cell seed chain and are closed at its tap P_DU or Q_DU.
module vernier_delay_loop #(
  parameter int unsigned SEED_DU  = vdg_pkg::SEED_DU,
  parameter int unsigned P_DU     = vdg_pkg::P_DU,
  parameter int unsigned Q_DU     = vdg_pkg::Q_DU,
  parameter realtime     T_DU_PS  = vdg_pkg::T_DU_PS,
  parameter realtime     T_OR_PS  = vdg_pkg::T_OR_PS,
  parameter realtime     T_MUX_PS = vdg_pkg::T_MUX_PS,
  parameter realtime     TP_PS    = vdg_pkg::TP_PS,
  parameter realtime     T_DFF_PS = vdg_pkg::T_DFF_PS
) (
  input  logic start_fast,
  input  logic start_slow,
  input  logic clear,
  output logic fast_osc,
  output logic slow_osc
);
  timeunit 1ps;
  timeprecision 10fs;

  delay_loop #(
    .SEED_DU(SEED_DU), .NUM_DU(P_DU), .T_DU_PS(T_DU_PS), .T_OR_PS(T_OR_PS), .T_MUX_PS(T_MUX_PS),
    .TP_PS(TP_PS), .T_DFF_PS(T_DFF_PS)
  ) u_fast (.start(start_fast), .clear(clear), .osc(fast_osc));

  delay_loop #(
    .SEED_DU(SEED_DU), .NUM_DU(Q_DU), .T_DU_PS(T_DU_PS), .T_OR_PS(T_OR_PS), .T_MUX_PS(T_MUX_PS),
    .TP_PS(TP_PS), .T_DFF_PS(T_DFF_PS)
  ) u_slow (.start(start_slow), .clear(clear), .osc(slow_osc));
endmodule
