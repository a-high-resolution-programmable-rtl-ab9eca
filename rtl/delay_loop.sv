// delay_loop -- one oscillator loop of the Vernier delay loop.
//
// Behavioural model built from the published loop structure:
//
//   start -> reshaper -> OR -> DU 1 .. DU NUM_DU -> reshaper -> osc
//                        ^                                        |
//                        +-- MUX (0: ground, 1: osc, select ~clear) +
//
// Both loops of the generator are copies of one seed loop: a carry chain of
// SEED_DU cells.  The loop is closed at the tap after cell NUM_DU, the
// fine-tuning point; the cells beyond it stay in place, unused, so the two
// loops keep the same placement and differ only in where they are tapped.
//
// A rising edge at `start` injects one pulse; it runs round the loop, each
// lap lasting
//
//   T = T_MUX + T_OR + NUM_DU * T_DU + T_DFF + T_p,
//
// and appears at `osc` once per lap with width T_p, until `clear` opens the
// loop at the multiplexer.  `osc` is the fine-tuning point where the loop is
// observed and, in the prototype, moved back DU by DU.  The OR, the
// multiplexer and the two reshapers follow the published drawing (the text
// mentions one reshaper per loop, the drawing two; the drawing is followed);
// the gate delays and the select polarity are this design's choices.
module delay_loop #(
  parameter int unsigned SEED_DU  = vdg_pkg::SEED_DU,
  parameter int unsigned NUM_DU   = SEED_DU,
  parameter realtime     T_DU_PS  = vdg_pkg::T_DU_PS,
  parameter realtime     T_OR_PS  = vdg_pkg::T_OR_PS,
  parameter realtime     T_MUX_PS = vdg_pkg::T_MUX_PS,
  parameter realtime     TP_PS    = vdg_pkg::TP_PS,
  parameter realtime     T_DFF_PS = vdg_pkg::T_DFF_PS
) (
  input  logic start,
  input  logic clear,
  output logic osc
);
  timeunit 1ps;
  timeprecision 10fs;

  logic start_rs;   // injected pulse after the input reshaper
  logic fb;         // feedback through the multiplexer
  logic or_out;
  logic loop_in;    // OR output after its delay, head of the carry chain
  logic mux_out;
  logic chain_out;
  logic [SEED_DU-1:0] taps;
  logic seed_out;   // end of the seed chain, left open as in the prototype

  pulse_width_reshaper #(.TP_PS(TP_PS), .T_DFF_PS(T_DFF_PS)) u_rs_in (
    .in(start), .out(start_rs)
  );

  // OR gate and feedback multiplexer, each followed by its gate delay.
  assign or_out = start_rs | fb;
  delay_buffer #(.DELAY_PS(T_OR_PS)) u_t_or (.in(or_out), .out(loop_in));

  if (NUM_DU < 1 || NUM_DU > SEED_DU) begin : g_bad_tap
    $error("delay_loop: NUM_DU must lie in 1..SEED_DU");
  end

  carry_delay_line #(.NUM_DU(SEED_DU), .T_DU_PS(T_DU_PS)) u_chain (
    .in(loop_in), .out(seed_out), .taps(taps)
  );

  // Fine-tuning point: the loop is closed after cell NUM_DU.
  assign chain_out = taps[NUM_DU-1];

  pulse_width_reshaper #(.TP_PS(TP_PS), .T_DFF_PS(T_DFF_PS)) u_rs_end (
    .in(chain_out), .out(osc)
  );

  assign mux_out = clear ? 1'b0 : osc;
  delay_buffer #(.DELAY_PS(T_MUX_PS)) u_t_mux (.in(mux_out), .out(fb));
endmodule
