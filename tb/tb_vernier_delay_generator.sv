// tb_vernier_delay_generator -- end-to-end test of the whole generator at its
// default parameters (8-bit m, 6-bit n, 31/32-DU loops, 1 us period).
//
// A host model writes delay codes and starts operations; a monitor times the
// rising edges of `leading` and `lagging`.  Expected values are worked out
// here from the clock period and the element delays of the models:
//   lagging - leading = m * 2000 + (n + 1) * 38.6 ps
//   leading           = T0 + 1000 + 6446.6 + n * 4046.6 + 1000 ps
// where T0 is the clock edge after the trigger cycle (the constant (n+1) is
// the extra first pass of the longer loop, an offset a user calibrates out).
// Cases: the two operating points shown for the prototype, (0,6) and (3,6);
// m = 0 and n = 0 (the preset-0 paths), n = 52 (the largest fine code), the
// largest m, random codes, and a run in the self-resetting testing mode,
// where operations must follow each other every 1 us exactly.  Each mechanism
// (coarse bypass at m = 0, coarse counting, fine bypass at n = 0, fine lap
// counting, single shot, testing mode, clear stopping the loops) is counted
// and must occur at least once.
module tb_vernier_delay_generator;
  timeunit 1ps;
  timeprecision 10fs;

  import vdg_pkg::*;

  localparam realtime TCLK = 2000.0;
  localparam realtime RF   = 38.6;
  localparam realtime LEAD_FIXED = 1000.0 + 6446.6 + 1000.0;
  localparam realtime LAP_F = 4046.6;

  logic clk = 1'b0, rst_n;
  logic cfg_valid, start, auto_mode;
  logic [M_W-1:0] cfg_m;
  logic [N_W-1:0] cfg_n;
  logic leading, lagging, fast_osc, slow_osc, busy;
  logic [15:0] ops_done;

  int checks = 0, failures = 0;
  int n_coarse_bypass = 0, n_coarse_count = 0, n_fine_bypass = 0, n_fine_laps = 0;
  int n_single = 0, n_auto = 0, n_clear_stop = 0;
  realtime t_lead[$], t_lag[$], t_busy_rise;
  int osc_edges = 0;

  vernier_delay_generator dut (
    .clk(clk), .rst_n(rst_n), .cfg_valid(cfg_valid), .cfg_m(cfg_m), .cfg_n(cfg_n),
    .start(start), .auto_mode(auto_mode),
    .leading(leading), .lagging(lagging), .fast_osc(fast_osc), .slow_osc(slow_osc),
    .busy(busy), .ops_done(ops_done)
  );

  always #(TCLK / 2) clk = ~clk;
  always @(posedge leading) t_lead.push_back($realtime);
  always @(posedge lagging) t_lag.push_back($realtime);
  always @(posedge busy) t_busy_rise = $realtime;
  always @(posedge fast_osc or posedge slow_osc) osc_edges++;

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic count_mechanisms(input int m, input int n);
    if (m == 0) n_coarse_bypass++; else n_coarse_count++;
    if (n == 0) n_fine_bypass++;   else n_fine_laps++;
  endtask

  // host writes a code (as the USB controller would)
  task automatic write_code(input int m, input int n);
    @(negedge clk); cfg_valid = 1'b1; cfg_m = M_W'(m); cfg_n = N_W'(n);
    @(negedge clk); cfg_valid = 1'b0;
  endtask

  task automatic single_shot(input int m, input int n);
    realtime expect_interval, expect_lead;
    write_code(m, n);
    t_lead.delete(); t_lag.delete();
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    wait (!busy);
    // T0: the edge after the trigger cycle, which starts with busy
    expect_lead     = t_busy_rise + TCLK + LEAD_FIXED + real'(n) * LAP_F;
    expect_interval = real'(m) * TCLK + real'(n + 1) * RF;
    check(t_lead.size() == 1 && t_lag.size() == 1,
          $sformatf("(m,n)=(%0d,%0d): %0d leading, %0d lagging pulses", m, n, t_lead.size(), t_lag.size()));
    if (t_lead.size() == 1 && t_lag.size() == 1) begin
      check(near(t_lead[0], expect_lead),
            $sformatf("(m,n)=(%0d,%0d): leading %0.2f ps after T0-1, expected %0.2f", m, n,
                      t_lead[0] - t_busy_rise, expect_lead - t_busy_rise));
      check(near(t_lag[0] - t_lead[0], expect_interval),
            $sformatf("(m,n)=(%0d,%0d): interval %0.2f ps, expected %0.2f", m, n,
                      t_lag[0] - t_lead[0], expect_interval));
      $display("(m,n)=(%0d,%0d): delay %0.1f ps (nominal m*2000+n*38.6 = %0.1f ps)", m, n,
               t_lag[0] - t_lead[0], real'(m) * TCLK + real'(n) * RF);
    end
    count_mechanisms(m, n);
    n_single++;
    // after the clear the loops must be silent
    begin
      int e0 = osc_edges;
      repeat (50) @(posedge clk);
      check(osc_edges == e0, "loops stopped by clear");
      if (osc_edges == e0) n_clear_stop++;
    end
  endtask

  initial begin
    int ops0;
    rst_n = 1'b1; cfg_valid = 1'b0; start = 1'b0; auto_mode = 1'b0; cfg_m = '0; cfg_n = '0;
    #300 rst_n = 1'b0;
    #10000 rst_n = 1'b1;
    repeat (20) @(posedge clk);

    single_shot(0, 6);     // prototype operating point: about 232 ps
    single_shot(3, 6);     // prototype operating point: about 6232 ps
    single_shot(0, 0);
    single_shot(0, 52);
    single_shot(1, 0);
    single_shot(255, 52);
    repeat (6) single_shot($urandom_range(255), $urandom_range(52));

    // testing mode: one operation per microsecond by self-reset
    write_code(3, 6);
    t_lead.delete(); t_lag.delete();
    ops0 = ops_done;
    @(negedge clk); auto_mode = 1'b1;
    repeat (5 * PERIOD_CYCLES + 100) @(posedge clk);
    @(negedge clk); auto_mode = 1'b0;
    wait (!busy);
    check(t_lead.size() >= 5 && t_lead.size() == t_lag.size(),
          $sformatf("testing mode: %0d leading / %0d lagging pulses", t_lead.size(), t_lag.size()));
    for (int i = 0; i < t_lead.size() && i < t_lag.size(); i++) begin
      check(near(t_lag[i] - t_lead[i], 3.0 * TCLK + 7.0 * RF),
            $sformatf("testing mode op %0d interval %0.2f", i, t_lag[i] - t_lead[i]));
      if (i > 0) check(near(t_lead[i] - t_lead[i-1], real'(PERIOD_CYCLES) * TCLK),
                       $sformatf("testing mode spacing %0.1f ps", t_lead[i] - t_lead[i-1]));
      n_auto++;
    end
    check(int'(ops_done) - ops0 == t_lead.size(), "operations counted");

    $display("mechanisms: coarse_bypass=%0d coarse_count=%0d fine_bypass=%0d fine_laps=%0d single=%0d auto=%0d clear_stop=%0d",
             n_coarse_bypass, n_coarse_count, n_fine_bypass, n_fine_laps, n_single, n_auto, n_clear_stop);
    check(n_coarse_bypass > 0, "coarse bypass (m = 0) exercised");
    check(n_coarse_count > 0, "coarse counting exercised");
    check(n_fine_bypass > 0, "fine bypass (n = 0) exercised");
    check(n_fine_laps > 0, "fine lap counting exercised");
    check(n_single > 0, "single shot exercised");
    check(n_auto > 0, "testing mode exercised");
    check(n_clear_stop > 0, "clear stopping the loops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
