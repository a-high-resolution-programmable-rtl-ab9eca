// tb_fine_delay_generator -- feeds the fine step two start pulses a chosen
// time D apart and checks the extracted outputs against the lap times worked
// out by hand from the element delays (see tb_vernier_delay_loop):
//   leading = start1 + 6446.6 + n * 4046.6 + 1000 (output buffer)
//   lagging = start2 + 6485.2 + n * 4085.2 + 1000
// so lagging - leading = D + (n + 1) * 38.6 ps.  Each output must be a single
// 1 ns pulse.  n covers 0, 6, 52 (the largest code used) and random values.
module tb_fine_delay_generator;
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned N_W = 6;
  localparam realtime FIRST_F = 6446.6, LAP_F = 4046.6;
  localparam realtime FIRST_S = 6485.2, LAP_S = 4085.2;
  localparam realtime TAUP = 1000.0;

  logic c1, c2, clear;
  logic [N_W-1:0] n;
  logic leading, lagging, fast_osc, slow_osc;
  realtime rl[$], rg[$], fl[$];
  int checks = 0, failures = 0;

  fine_delay_generator #(.N_W(N_W)) dut (
    .coarse_out1(c1), .coarse_out2(c2), .clear(clear), .n(n),
    .leading(leading), .lagging(lagging), .fast_osc(fast_osc), .slow_osc(slow_osc)
  );

  always @(posedge leading) rl.push_back($realtime);
  always @(posedge lagging) rg.push_back($realtime);
  always @(negedge leading) fl.push_back($realtime);

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int nv, input realtime d);
    realtime t1, t2;
    clear = 1'b1;
    #10000;
    rl.delete(); rg.delete(); fl.delete();
    n = N_W'(nv);
    clear = 1'b0;
    #2000;
    fork
      begin t1 = $realtime; c1 = 1'b1; #TAUP c1 = 1'b0; end
      begin #d; t2 = $realtime; c2 = 1'b1; #TAUP c2 = 1'b0; end
    join
    #(d + 10000.0 + real'(nv + 2) * 4100.0);
    check(rl.size() == 1 && rg.size() == 1,
          $sformatf("n=%0d: %0d leading / %0d lagging pulses", nv, rl.size(), rg.size()));
    if (rl.size() == 1 && rg.size() == 1) begin
      check(near(rl[0], t1 + FIRST_F + real'(nv) * LAP_F + TAUP), $sformatf("n=%0d: leading at %0.2f", nv, rl[0] - t1));
      check(near(rg[0], t2 + FIRST_S + real'(nv) * LAP_S + TAUP), $sformatf("n=%0d: lagging at %0.2f", nv, rg[0] - t2));
      check(near(rg[0] - rl[0], d + real'(nv + 1) * 38.6), $sformatf("n=%0d D=%0.1f: interval %0.2f", nv, d, rg[0] - rl[0]));
      check(fl.size() == 1 && near(fl[0] - rl[0], TAUP), "leading width tau_p");
    end
  endtask

  initial begin
    clear = 1'b0; c1 = 1'b0; c2 = 1'b0; n = '0;
    #100;
    run(0, 0.0);
    run(6, 0.0);
    run(6, 6000.0);
    run(52, 2000.0);
    run(1, 510000.0);
    repeat (6) run($urandom_range(52), real'($urandom_range(0, 20)) * 2000.0);
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
