// tb_pulse_extractor -- drives two free pulse trains of different periods
// into the two channels and checks that each channel raises its output
// exactly once, on the rising edge of pulse number preset (counting from 0),
// for presets 0, 1, the largest code and random values.  The fixed delay
// buffer between Q and CLR is modelled here by a delayed assignment.
module tb_pulse_extractor;
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned W = 6;
  localparam int unsigned NPULSE = 70;   // pulses per train, more than 2^W
  localparam realtime TA = 4000.0, TB = 3000.0;

  logic osc_a, osc_b, clear;
  logic [W-1:0] preset_a, preset_b;
  logic ff_q_a, ff_q_b, ff_clr_a, ff_clr_b;
  int checks = 0, failures = 0;
  realtime ra[$], rb[$];          // rising edges of the trains
  realtime qa[$], qb[$];          // rising edges of the outputs

  pulse_extractor #(.W(W)) dut (
    .osc_a(osc_a), .osc_b(osc_b), .preset_a(preset_a), .preset_b(preset_b),
    .clear(clear), .ff_clr_a(ff_clr_a), .ff_clr_b(ff_clr_b),
    .ff_q_a(ff_q_a), .ff_q_b(ff_q_b)
  );

  assign #(1000.0) ff_clr_a = ff_q_a;
  assign #(1000.0) ff_clr_b = ff_q_b;

  always @(posedge osc_a) ra.push_back($realtime);
  always @(posedge osc_b) rb.push_back($realtime);
  always @(posedge ff_q_a) qa.push_back($realtime);
  always @(posedge ff_q_b) qb.push_back($realtime);

  task automatic train_a();
    repeat (NPULSE) begin osc_a = 1'b1; #(TA / 2); osc_a = 1'b0; #(TA / 2); end
  endtask
  task automatic train_b();
    #(700.0);
    repeat (NPULSE) begin osc_b = 1'b1; #(TB / 3); osc_b = 1'b0; #(2 * TB / 3); end
  endtask

  task automatic check_one(input string ch, input int preset, ref realtime r[$], ref realtime q[$]);
    checks++;
    if (q.size() != 1) begin
      failures++;
      $display("FAIL: channel %s preset %0d gave %0d pulses", ch, preset, q.size());
    end else if (q[0] != r[preset]) begin
      failures++;
      $display("FAIL: channel %s preset %0d fired at %0.1f, pulse edge at %0.1f", ch, preset, q[0], r[preset]);
    end
  endtask

  task automatic run(input int pa, input int pb);
    clear = 1'b1; osc_a = 1'b0; osc_b = 1'b0;
    preset_a = W'(pa); preset_b = W'(pb);
    #5000;
    ra.delete(); rb.delete(); qa.delete(); qb.delete();
    clear = 1'b0;
    #1000;
    fork train_a(); train_b(); join
    #5000;
    check_one("a", pa, ra, qa);
    check_one("b", pb, rb, qb);
  endtask

  initial begin
    clear = 1'b0; osc_a = 1'b0; osc_b = 1'b0; preset_a = '0; preset_b = '0;
    #100 clear = 1'b1;
    #5000;
    run(0, 0);
    run(1, 0);
    run(0, 1);
    run(52, 6);
    run(63, 62);
    repeat (10) run($urandom_range(63), $urandom_range(63));
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
