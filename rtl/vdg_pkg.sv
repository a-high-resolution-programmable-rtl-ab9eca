// vdg_pkg -- constants and types shared by the Vernier delay generator.
//
// The generator produces two pulses, a leading and a lagging one, whose
// spacing is programmed by a coarse count m (whole periods of the 500 MHz
// system clock) and a fine count n (laps of two ring oscillators whose
// periods differ by the fine resolution r_f).  The clock period, the 52-step
// fine range and the 1 us self-reset period are the figures of the published
// prototype; the code widths are this design's choice (6 bits hold 52; 8 bits
// of m keep a whole operation inside the 1 us period).
//
// All times are in picoseconds.  The loop timing constants are model values
// of the behavioural delay elements, picked so that one lap of either loop
// lasts about 4 ns (4046.6 ps fast, 4085.2 ps slow) and the two loops differ
// by 38.6 ps, the resolution reported for the prototype.  A lap must last
// more than 2 * T_p: the reshaper's clear is held for T_p after its output
// rises, and an edge returning inside that time would be lost.
package vdg_pkg;
  timeunit 1ps;
  timeprecision 10fs;

  // Code widths.
  localparam int unsigned M_W = 8;     // coarse delay value m
  localparam int unsigned N_W = 6;     // fine delay value n
  localparam int unsigned N_MAX = 52;  // largest n the host programs

  // System clock: 500 MHz, i.e. the coarse resolution r_c.
  localparam realtime T_CLK_PS = 2000.0;

  // Testing mode: one operation every 1 us = 500 system clock cycles.
  localparam int unsigned PERIOD_CYCLES = 500;
  localparam int unsigned CLEAR_CYCLES  = 4;

  // Behavioural delay-element values.
  localparam realtime TP_PS     = 2000.0;  // reshaped pulse width T_p
  localparam realtime TAU_P_PS  = 1000.0;  // pulse width of the extractor outputs
  localparam realtime T_DFF_PS  = 550.0;   // flip-flop clock-to-Q
  localparam realtime T_DU_PS   = 38.6;    // one carry-chain delay unit
  localparam realtime T_OR_PS   = 150.0;   // loop OR gate
  localparam realtime T_MUX_PS  = 150.0;   // loop feedback multiplexer
  localparam int unsigned SEED_DU = 32;    // DUs in the seed chain of each loop (maximum)
  localparam int unsigned P_DU  = 31;      // DUs in the fast loop
  localparam int unsigned Q_DU  = 32;      // DUs in the slow loop (maximum)

  // One programmed delay value.
  typedef struct packed {
    logic [M_W-1:0] m;
    logic [N_W-1:0] n;
  } delay_code_t;

  // Nominal lap time of a loop built from num_du delay units.
  function automatic realtime loop_period_ps(int unsigned num_du);
    return T_MUX_PS + T_OR_PS + real'(num_du) * T_DU_PS + T_DFF_PS + TP_PS;
  endfunction
endpackage
