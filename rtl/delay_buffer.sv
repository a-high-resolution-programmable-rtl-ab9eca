// delay_buffer -- behavioural model of a fixed delay buffer.
//
// Behavioural model, not synthesizable logic.  In the FPGA this is a chain of
// buffers or routing whose only property is its propagation delay; here it
// is a transport delay: every edge of `in` reappears on `out` exactly
// DELAY_PS later, however close the edges are (a runt pulse, such as the one
// left when `clear` cuts a circulating pulse, passes through unchanged).
// Pending edges wait in a time-ordered queue; since the delay is constant,
// new edges always go to its tail.  The generator uses the block between Q
// and CLR of its self-clearing flip-flops, where the delay sets the width of
// the pulse they emit, and as the delay of gates and carry-chain cells in the
// loop models.  The default 2 ns is the reshaped pulse width T_p of the
// prototype.  `out` starts low, as every source in the design does.
module delay_buffer #(
  parameter realtime DELAY_PS = 2000.0
) (
  input  logic in,
  output logic out = 1'b0
);
  timeunit 1ps;
  timeprecision 10fs;

  realtime t_due[$];   // when each pending edge is due at the output
  logic    level[$];   // the level it sets
  event    pushed;

  always @(in) begin
    t_due.push_back($realtime + DELAY_PS);
    level.push_back(in);
    -> pushed;
  end

  initial begin
    forever begin
      if (t_due.size() == 0) @(pushed);
      #(t_due[0] - $realtime);
      out = level[0];
      void'(t_due.pop_front());
      void'(level.pop_front());
    end
  end
endmodule
