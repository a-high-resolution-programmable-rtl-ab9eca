// tb_delay_buffer -- checks the fixed delay buffer model: every edge is
// delayed by exactly DELAY_PS, including the edges of a pulse narrower than
// the delay, and two instances switching at the same instant both respond.
module tb_delay_buffer;
  timeunit 1ps;
  timeprecision 10fs;

  localparam realtime D = 2000.0;
  logic in, out, in2, out2;
  int checks = 0, failures = 0;
  realtime t_rise[$], t_fall[$];

  delay_buffer #(.DELAY_PS(D)) dut (.in(in), .out(out));
  delay_buffer #(.DELAY_PS(D)) dut2 (.in(in2), .out(out2));
  realtime t2_rise[$];
  always @(posedge out2) t2_rise.push_back($realtime);

  always @(posedge out) t_rise.push_back($realtime);
  always @(negedge out) t_fall.push_back($realtime);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  initial begin
    in = 1'b0; in2 = 1'b0;
    #10000;
    // a 3 ns pulse at t = 10 ns, on both instances at once
    in = 1'b1; in2 = 1'b1; #3000; in = 1'b0; in2 = 1'b0;
    #10000;
    // a 0.5 ns pulse at t = 23 ns: shorter than the delay, still passes
    in = 1'b1; #500; in = 1'b0;
    // two pulses inside one delay time at t = 33 ns
    #10000;
    in = 1'b1; #300; in = 1'b0; #300; in = 1'b1; #300; in = 1'b0;
    #10000;
    check(t_rise.size() == 4, $sformatf("%0d rising edges pass", t_rise.size()));
    check(t_fall.size() == 4, $sformatf("%0d falling edges pass", t_fall.size()));
    check(t2_rise.size() == 1 && near(t2_rise[0], 10000.0 + D), "second instance responds");
    if (t_rise.size() == 4 && t_fall.size() == 4) begin
      check(near(t_rise[0], 10000.0 + D), "rising edge delayed by D");
      check(near(t_fall[0], 13000.0 + D), "falling edge delayed by D");
      check(near(t_rise[1], 23000.0 + D) && near(t_fall[1], 23500.0 + D), "narrow pulse delayed by D");
      check(near(t_rise[2], 33500.0 + D) && near(t_fall[2], 33800.0 + D), "close pulse 1 delayed by D");
      check(near(t_rise[3], 34100.0 + D) && near(t_fall[3], 34400.0 + D), "close pulse 2 delayed by D");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
