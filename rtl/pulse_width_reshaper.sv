// pulse_width_reshaper -- gives every pulse passing round a delay loop the
// same positive width T_p.
//
// Behavioural model: the logic is one D flip-flop, but the width it produces
// comes from a delay, so the module only has meaning with its delays.  The
// flip-flop has D tied high and is clocked by `in`; its Q passes through a
// T_p delay buffer to `out`, and `out` also drives the flip-flop's CLR.  A
// rising edge at `in` therefore sets Q after the clock-to-Q delay T_DFF_PS,
// `out` rises T_p later, clears Q, and falls after another T_p:
//
//   in  ___/~~~~~~~~~~~~~~~~~~~~~\_____ (any width)
//   out ______________/~~~~~~~~~\_____  rises T_DFF+T_p after in, width T_p
//
// The structure (D = Vcc, Q -> T_p buffer -> out and CLR) follows the
// published circuit, as do T_p = 2 ns and the requirement T_p < T_f.  The
// clock-to-Q value is a model value of this design; it is lumped into the
// clock path so the clear path stays immediate.  A rising edge at `in` while
// Q is already set is ignored, as in the flip-flop it models.
module pulse_width_reshaper #(
  parameter realtime TP_PS    = 2000.0,
  parameter realtime T_DFF_PS = 550.0
) (
  input  logic in,
  output logic out
);
  timeunit 1ps;
  timeprecision 10fs;

  logic clk_d;  // input edge after the flip-flop's clock-to-Q delay
  logic q = 1'b0;  // FPGA registers power up cleared

  delay_buffer #(.DELAY_PS(T_DFF_PS)) u_tdff (.in(in), .out(clk_d));

  always_ff @(posedge clk_d or posedge out) begin
    if (out) q <= 1'b0;
    else     q <= 1'b1;
  end

  delay_buffer #(.DELAY_PS(TP_PS)) u_tp (.in(q), .out(out));
endmodule
