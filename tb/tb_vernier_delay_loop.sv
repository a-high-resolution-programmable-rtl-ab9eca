// tb_vernier_delay_loop -- starts both loops and checks every oscillation
// edge against the lap times worked out by hand from the element delays:
//   first pulse = start + 2*(T_DFF + T_p) + T_OR + N_DU*T_DU
//   lap         = T_MUX + T_OR + N_DU*T_DU + T_DFF + T_p
// i.e. 6446.6 ps / 4046.6 ps for the 31-DU fast loop and 6485.2 ps /
// 4085.2 ps for the 32-DU slow loop, so the loops slip by r_f = 38.6 ps per
// lap.  Also checks the 2 ns pulse width and that clear stops both loops.
module tb_vernier_delay_loop;
  timeunit 1ps;
  timeprecision 10fs;

  localparam realtime FIRST_F = 6446.6, LAP_F = 4046.6;
  localparam realtime FIRST_S = 6485.2, LAP_S = 4085.2;
  localparam int unsigned LAPS = 60;

  logic start_fast, start_slow, clear, fast_osc, slow_osc;
  realtime rf[$], rs[$], ff[$], fs[$];
  int checks = 0, failures = 0;

  vernier_delay_loop dut (
    .start_fast(start_fast), .start_slow(start_slow), .clear(clear),
    .fast_osc(fast_osc), .slow_osc(slow_osc)
  );

  always @(posedge fast_osc) rf.push_back($realtime);
  always @(posedge slow_osc) rs.push_back($realtime);
  always @(negedge fast_osc) ff.push_back($realtime);
  always @(negedge slow_osc) fs.push_back($realtime);

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  task automatic check_loop(input string name, input realtime t_start, input realtime first,
                            input realtime lap, ref realtime r[$], ref realtime f[$]);
    int bad = 0;
    checks++;
    if (r.size() < LAPS) begin
      failures++;
      $display("FAIL: %s loop gave only %0d pulses", name, r.size());
      return;
    end
    for (int k = 0; k < LAPS; k++) begin
      checks += 2;
      if (!near(r[k], t_start + first + real'(k) * lap)) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL: %s pulse %0d at %0.2f, expected %0.2f", name, k, r[k],
                              t_start + first + real'(k) * lap);
      end
      if (!near(f[k] - r[k], 2000.0)) begin
        failures++; bad++;
        if (bad < 4) $display("FAIL: %s pulse %0d width %0.2f", name, k, f[k] - r[k]);
      end
    end
  endtask

  initial begin
    realtime t1, t2;
    int nf, ns;
    start_fast = 1'b0; start_slow = 1'b0; clear = 1'b1;
    #20000 clear = 1'b0;
    #5000;
    rf.delete(); rs.delete(); ff.delete(); fs.delete();
    t1 = $realtime;
    start_fast = 1'b1; #1000 start_fast = 1'b0;
    #5000;
    t2 = $realtime;
    start_slow = 1'b1; #1000 start_slow = 1'b0;
    #(real'(LAPS + 2) * 4100.0);
    check_loop("fast", t1, FIRST_F, LAP_F, rf, ff);
    check_loop("slow", t2, FIRST_S, LAP_S, rs, fs);
    // the Vernier slip: after k laps the slow loop has lost k * r_f
    checks++;
    if (!near((rs[50] - rf[50]) - (rs[0] - rf[0]), 50.0 * 38.6)) begin
      failures++; $display("FAIL: slip over 50 laps %0.2f", (rs[50] - rf[50]) - (rs[0] - rf[0]));
    end
    clear = 1'b1;
    #10000;
    nf = rf.size(); ns = rs.size();
    #20000;
    checks++;
    if (rf.size() != nf || rs.size() != ns || fast_osc || slow_osc) begin
      failures++; $display("FAIL: loops still oscillate after clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
