// vernier_delay_generator -- programmable relative delay generator, top level.
//
// After each trigger the generator emits two pulses, `leading` and `lagging`,
// spaced by
//
//   dT = m * T_clk + n * r_f + offset,   T_clk = 2 ns, r_f = T_s - T_f,
//
// where m and n are the delay code written by the host.  Three parts:
//   * control_interface: takes (m, n) from the host port, triggers an
//     operation (single shot on `start`, or one per microsecond while
//     `auto_mode` is high), latches the code and clears everything afterwards;
//   * coarse_delay_generator: two pulses m clock periods apart, from the
//     gated 500 MHz clock;
//   * fine_delay_generator: two ring oscillators of slightly different lap
//     time started by those pulses; lap n of each is extracted.
// The offset is constant (one r_f with the default loops) and the host must
// keep n <= 52 by carrying into m, as a lap count above that would exceed
// one clock period of fine delay.
//
// The 500 MHz clock (from a PLL) and the host port (from a USB controller
// chip) come in as plain inputs.  `fast_osc` and `slow_osc` are the loop
// oscillations, brought out for observing and trimming the loops.
// The coarse and fine paths contain behavioural delay elements (carry-chain
// DUs, fixed buffers), so this top level is a timing model; the counters,
// comparators, flip-flops and the controller are synthesizable logic.
module vernier_delay_generator #(
  parameter int unsigned M_W           = vdg_pkg::M_W,
  parameter int unsigned N_W           = vdg_pkg::N_W,
  parameter int unsigned PERIOD_CYCLES = vdg_pkg::PERIOD_CYCLES,
  parameter int unsigned CLEAR_CYCLES  = vdg_pkg::CLEAR_CYCLES,
  parameter int unsigned P_DU          = vdg_pkg::P_DU,
  parameter int unsigned Q_DU          = vdg_pkg::Q_DU
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_valid,
  input  logic [M_W-1:0] cfg_m,
  input  logic [N_W-1:0] cfg_n,
  input  logic           start,
  input  logic           auto_mode,
  output logic           leading,
  output logic           lagging,
  output logic           fast_osc,
  output logic           slow_osc,
  output logic           busy,
  output logic [15:0]    ops_done
);
  timeunit 1ps;
  timeprecision 10fs;

  logic           delay_trigger;
  logic           clear;
  logic [M_W-1:0] m_act;
  logic [N_W-1:0] n_act;
  logic           coarse_out1, coarse_out2;

  control_interface #(
    .M_W(M_W), .N_W(N_W), .PERIOD_CYCLES(PERIOD_CYCLES), .CLEAR_CYCLES(CLEAR_CYCLES)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n), .cfg_valid(cfg_valid), .cfg_m(cfg_m), .cfg_n(cfg_n),
    .start(start), .auto_mode(auto_mode), .delay_trigger(delay_trigger), .clear(clear),
    .m_act(m_act), .n_act(n_act), .busy(busy), .ops_done(ops_done)
  );

  coarse_delay_generator #(.M_W(M_W)) u_coarse (
    .clk(clk), .clear(clear), .delay_trigger(delay_trigger), .m(m_act),
    .coarse_out1(coarse_out1), .coarse_out2(coarse_out2)
  );

  fine_delay_generator #(.N_W(N_W), .P_DU(P_DU), .Q_DU(Q_DU)) u_fine (
    .coarse_out1(coarse_out1), .coarse_out2(coarse_out2), .clear(clear), .n(n_act),
    .leading(leading), .lagging(lagging), .fast_osc(fast_osc), .slow_osc(slow_osc)
  );
endmodule
