// carry_delay_line -- behavioural model of the delay element of one loop.
//
// Behavioural model, not synthesizable logic.  NUM_DU delay units of the
// carry chain in series; `taps[k]` is the output of DU k+1, `out` the output
// of the last one, so the edge at `in` reaches `out` NUM_DU * T_DU_PS later.
// The loops of the generator are 32 DUs long at most; the fast loop is made
// one DU shorter than the slow one to set the fine resolution.
module carry_delay_line #(
  parameter int unsigned NUM_DU  = 32,
  parameter realtime     T_DU_PS = 38.6
) (
  input  logic              in,
  output logic              out,
  output logic [NUM_DU-1:0] taps
);
  timeunit 1ps;
  timeprecision 10fs;

  for (genvar k = 0; k < NUM_DU; k++) begin : g_du
    if (k == 0) begin : g_first
      delay_unit #(.T_DU_PS(T_DU_PS)) u_du (.cin(in), .cout(taps[0]));
    end else begin : g_next
      delay_unit #(.T_DU_PS(T_DU_PS)) u_du (.cin(taps[k-1]), .cout(taps[k]));
    end
  end

  assign out = taps[NUM_DU-1];
endmodule
