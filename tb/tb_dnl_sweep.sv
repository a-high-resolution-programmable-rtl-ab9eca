// tb_dnl_sweep -- the linearity measurement of the prototype, run on the
// model: with the default generator, sweep the fine code n over 0..52 at
// m = 0 (one coarse clock period of fine range), time every delay, and
// compute
//   LSB    = (T(52) - T(0)) / 52
//   DNL(n) = (T(n) - T(n-1)) / LSB - 1
//   INL(n) = (T(n) - T(0)) / LSB - n
// The model's loops have equal delay units, so the resolution must come out
// at 38.6 ps and DNL and INL at zero (the measured prototype reached
// -0.18..0.24 LSB and -0.02..0.01 LSB; mismatch and jitter are not modelled).
// It also checks that the 52 fine steps span at least one 2 ns clock period,
// so the fine range joins the next coarse step, and that step m = 1, n = 0
// continues the scale at 2000 ps + offset.
module tb_dnl_sweep;
  timeunit 1ps;
  timeprecision 10fs;

  import vdg_pkg::*;

  logic clk = 1'b0, rst_n;
  logic cfg_valid, start, auto_mode;
  logic [M_W-1:0] cfg_m;
  logic [N_W-1:0] cfg_n;
  logic leading, lagging, fast_osc, slow_osc, busy;
  logic [15:0] ops_done;
  int checks = 0, failures = 0;
  realtime t_lead, t_lag;
  realtime t_n[N_MAX + 1];

  vernier_delay_generator dut (
    .clk(clk), .rst_n(rst_n), .cfg_valid(cfg_valid), .cfg_m(cfg_m), .cfg_n(cfg_n),
    .start(start), .auto_mode(auto_mode),
    .leading(leading), .lagging(lagging), .fast_osc(fast_osc), .slow_osc(slow_osc),
    .busy(busy), .ops_done(ops_done)
  );

  always #1000 clk = ~clk;
  always @(posedge leading) t_lead = $realtime;
  always @(posedge lagging) t_lag = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic measure(input int m, input int n, output realtime dt);
    @(negedge clk); cfg_valid = 1'b1; cfg_m = M_W'(m); cfg_n = N_W'(n);
    @(negedge clk); cfg_valid = 1'b0; start = 1'b1;
    @(negedge clk); start = 1'b0;
    t_lead = -1.0; t_lag = -1.0;
    wait (!busy);
    check(t_lead >= 0.0 && t_lag >= 0.0, $sformatf("(m,n)=(%0d,%0d) produced both outputs", m, n));
    dt = t_lag - t_lead;
  endtask

  initial begin
    realtime lsb, dnl, inl, dnl_min, dnl_max, inl_min, inl_max, t_next;
    rst_n = 1'b1; cfg_valid = 1'b0; start = 1'b0; auto_mode = 1'b0; cfg_m = '0; cfg_n = '0;
    #300 rst_n = 1'b0;
    #10000 rst_n = 1'b1;
    repeat (20) @(posedge clk);
    for (int n = 0; n <= N_MAX; n++) measure(0, n, t_n[n]);
    lsb = (t_n[N_MAX] - t_n[0]) / real'(N_MAX);
    dnl_min = 1.0e9; dnl_max = -1.0e9; inl_min = 1.0e9; inl_max = -1.0e9;
    for (int n = 1; n <= N_MAX; n++) begin
      dnl = (t_n[n] - t_n[n-1]) / lsb - 1.0;
      inl = (t_n[n] - t_n[0]) / lsb - real'(n);
      if (dnl < dnl_min) dnl_min = dnl;
      if (dnl > dnl_max) dnl_max = dnl;
      if (inl < inl_min) inl_min = inl;
      if (inl > inl_max) inl_max = inl;
    end
    $display("resolution %0.3f ps, fine range %0.1f ps, DNL %0.4f..%0.4f LSB, INL %0.4f..%0.4f LSB",
             lsb, t_n[N_MAX] - t_n[0], dnl_min, dnl_max, inl_min, inl_max);
    check(lsb > 38.55 && lsb < 38.65, $sformatf("resolution %0.3f ps", lsb));
    check(dnl_min > -0.01 && dnl_max < 0.01, "DNL within 0.01 LSB");
    check(inl_min > -0.01 && inl_max < 0.01, "INL within 0.01 LSB");
    check(t_n[N_MAX] - t_n[0] >= 2000.0, "52 fine steps cover one coarse period");
    measure(1, 0, t_next);
    check(t_next - t_n[0] > 1999.95 && t_next - t_n[0] < 2000.05, "coarse step is one clock period");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
