// tb_coarse_delay_generator -- triggers the coarse step with a range of m and
// checks: coarse_out1 rises one clock period after the trigger cycle starts
// plus the 1 ns output buffer, coarse_out2 rises exactly m * 2 ns after it,
// each output is one 1 ns pulse, and nothing fires while cleared.
module tb_coarse_delay_generator;
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned M_W = 8;
  localparam realtime TCLK = 2000.0, TAUP = 1000.0;

  logic clk = 1'b0, clear, delay_trigger;
  logic [M_W-1:0] m;
  logic coarse_out1, coarse_out2;
  realtime r1[$], r2[$], f1[$];
  int checks = 0, failures = 0;

  coarse_delay_generator #(.M_W(M_W)) dut (
    .clk(clk), .clear(clear), .delay_trigger(delay_trigger), .m(m),
    .coarse_out1(coarse_out1), .coarse_out2(coarse_out2)
  );

  always #(TCLK / 2) clk = ~clk;
  always @(posedge coarse_out1) r1.push_back($realtime);
  always @(posedge coarse_out2) r2.push_back($realtime);
  always @(negedge coarse_out1) f1.push_back($realtime);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int mv);
    realtime t_edge;
    @(posedge clk); clear <= 1'b1;
    repeat (4) @(posedge clk);
    clear <= 1'b0; m <= M_W'(mv);
    repeat (3) @(posedge clk);
    check(r1.size() == 0 && r2.size() == 0, "no output while idle");
    t_edge = $realtime;
    delay_trigger <= 1'b1;
    @(posedge clk); delay_trigger <= 1'b0;
    repeat (mv + 10) @(posedge clk);
    check(r1.size() == 1 && r2.size() == 1,
          $sformatf("m=%0d: %0d / %0d output pulses", mv, r1.size(), r2.size()));
    if (r1.size() == 1 && r2.size() == 1) begin
      check(r1[0] == t_edge + TCLK + TAUP, $sformatf("m=%0d: out1 at %0.1f", mv, r1[0] - t_edge));
      check(r2[0] - r1[0] == real'(mv) * TCLK, $sformatf("m=%0d: spacing %0.1f", mv, r2[0] - r1[0]));
      check(f1.size() == 1 && f1[0] - r1[0] == TAUP, "out1 width tau_p");
    end
    r1.delete(); r2.delete(); f1.delete();
  endtask

  initial begin
    clear = 1'b0; delay_trigger = 1'b0; m = '0;
    #100 clear = 1'b1;
    run(0);
    run(1);
    run(3);
    run(255);
    repeat (6) run($urandom_range(2, 254));
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
