// pulse_extractor -- picks one pulse out of each of two pulse sequences.
//
// Two independent channels (pulse_extractor_ch), each a counter, an equality
// comparator against a preset, a 2:1 multiplexer and a D flip-flop.  Channel
// a picks pulse number preset_a (counting from 0) of osc_a, channel b pulse
// number preset_b of osc_b; each raises its ff_q on the rising edge of that
// pulse.  ff_q must be fed back to ff_clr through a fixed delay buffer by the
// parent, which makes ff_q a pulse as wide as that delay.
//
// The same block serves twice: in the coarse delay generator both channels
// count the gated 500 MHz clock with presets 0 and m, in the fine delay
// generator they count the fast and slow loop oscillations with preset n.
// `clear` (active high, asynchronous) resets both counters and flip-flops and
// must be held while the sequences are idle before an operation.
module pulse_extractor #(
  parameter int unsigned W = 6
) (
  input  logic         osc_a,
  input  logic         osc_b,
  input  logic [W-1:0] preset_a,
  input  logic [W-1:0] preset_b,
  input  logic         clear,
  input  logic         ff_clr_a,
  input  logic         ff_clr_b,
  output logic         ff_q_a,
  output logic         ff_q_b
);
  timeunit 1ps;
  timeprecision 10fs;

  pulse_extractor_ch #(.W(W)) u_ch_a (
    .osc(osc_a), .preset(preset_a), .clear(clear), .ff_clr(ff_clr_a), .ff_q(ff_q_a)
  );
  pulse_extractor_ch #(.W(W)) u_ch_b (
    .osc(osc_b), .preset(preset_b), .clear(clear), .ff_clr(ff_clr_b), .ff_q(ff_q_b)
  );
endmodule
