// delay_unit -- behavioural model of one carry-chain delay unit (DU).
//
// Behavioural model, not synthesizable logic.  A DU is the smallest,
// indivisible delay cell along the FPGA's dedicated carry chain: the carry
// input propagates to the carry output after T_DU_PS.  It is modelled as a
// transport delay (delay_buffer).  The DU delay of a real device is not a
// design value; the default here is the 38.6 ps resolution of the
// prototype, so that two loops one DU apart differ by that resolution.
module delay_unit #(
  parameter realtime T_DU_PS = 38.6
) (
  input  logic cin,
  output logic cout
);
  timeunit 1ps;
  timeprecision 10fs;

  delay_buffer #(.DELAY_PS(T_DU_PS)) u_delay (.in(cin), .out(cout));
endmodule
