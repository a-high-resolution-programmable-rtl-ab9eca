// tb_en_controller -- checks that the gated clock stays low until the
// trigger, then passes whole clock pulses starting with the rising edge that
// follows the trigger cycle, and stops again on clear.
module tb_en_controller;
  timeunit 1ps;
  timeprecision 10fs;

  localparam realtime TCLK = 2000.0;
  logic clk = 1'b0, clear, delay_trigger, en, gated_clk;
  int checks = 0, failures = 0;
  realtime g_rise[$], g_fall[$], c_rise[$];

  en_controller dut (.clk(clk), .clear(clear), .delay_trigger(delay_trigger), .en(en), .gated_clk(gated_clk));

  always #(TCLK / 2) clk = ~clk;
  always @(posedge clk) c_rise.push_back($realtime);
  always @(posedge gated_clk) g_rise.push_back($realtime);
  always @(negedge gated_clk) g_fall.push_back($realtime);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int wait_cycles, run_cycles, k;
    realtime t_trig;
    clear = 1'b0; delay_trigger = 1'b0;
    #100 clear = 1'b1;
    repeat (3) @(posedge clk);
    for (int trial = 0; trial < 6; trial++) begin
      wait_cycles = $urandom_range(1, 8);
      run_cycles  = $urandom_range(2, 30);
      @(posedge clk); clear <= 1'b0;
      repeat (wait_cycles) @(posedge clk);
      g_rise.delete(); g_fall.delete(); c_rise.delete();
      check(gated_clk == 1'b0 && en == 1'b0, "gated clock idle before trigger");
      t_trig = $realtime;
      delay_trigger <= 1'b1;             // trigger high in the cycle after this edge
      @(posedge clk); delay_trigger <= 1'b0;
      repeat (run_cycles) @(posedge clk);
      #1;
      // gated pulses: the edge that ends the trigger cycle and every one after it
      k = g_rise.size();
      check(k == run_cycles + 1, $sformatf("%0d gated pulses for %0d cycles", k, run_cycles + 1));
      if (k > 0) check(g_rise[0] == t_trig + TCLK, "first gated pulse on the next clock edge");
      if (k > 0 && g_fall.size() > 0) check(g_fall[0] == t_trig + 1.5 * TCLK, "first gated pulse is a whole clock pulse");
      check(en == 1'b1, "en high after trigger");
      @(negedge clk); clear = 1'b1;
      #(3 * TCLK);
      check(en == 1'b0 && gated_clk == 1'b0, "clear stops the gated clock");
      k = g_rise.size();
      #(3 * TCLK);
      check(g_rise.size() == k, "no gated pulse while cleared");
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
