// tb_control_interface -- checks the operation sequencer: after reset a
// clearing phase, single operations on `start`, back-to-back operations one
// per PERIOD_CYCLES in auto mode, a one-cycle trigger, CLEAR_CYCLES of clear
// after each working window, and the delay code latched at the trigger (a
// host write during an operation must not change the running code).
module tb_control_interface;
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned M_W = 8, N_W = 6;
  localparam int unsigned PERIOD = 500, CLR = 4;

  logic clk = 1'b0, rst_n;
  logic cfg_valid, start, auto_mode;
  logic [M_W-1:0] cfg_m, m_act;
  logic [N_W-1:0] cfg_n, n_act;
  logic delay_trigger, clear, busy;
  logic [15:0] ops_done;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint trig_cyc[$];
  int clear_len, clear_runs[$];
  logic [M_W-1:0] m_at_trig[$];
  logic [N_W-1:0] n_at_trig[$];

  control_interface #(.M_W(M_W), .N_W(N_W), .PERIOD_CYCLES(PERIOD), .CLEAR_CYCLES(CLR)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_valid(cfg_valid), .cfg_m(cfg_m), .cfg_n(cfg_n),
    .start(start), .auto_mode(auto_mode), .delay_trigger(delay_trigger), .clear(clear),
    .m_act(m_act), .n_act(n_act), .busy(busy), .ops_done(ops_done)
  );

  always #1000 clk = ~clk;

  // Monitor: trigger cycles, the code one cycle after the trigger, clear runs.
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (delay_trigger) begin
      trig_cyc.push_back(cyc);
      m_at_trig.push_back(m_act);
      n_at_trig.push_back(n_act);
    end
    if (clear) clear_len <= clear_len + 1;
    else if (clear_len != 0) begin
      clear_runs.push_back(clear_len);
      clear_len <= 0;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_code(input int m, input int n);
    @(negedge clk); cfg_valid = 1'b1; cfg_m = M_W'(m); cfg_n = N_W'(n);
    @(negedge clk); cfg_valid = 1'b0;
  endtask

  initial begin
    int t0;
    rst_n = 1'b1; cfg_valid = 1'b0; start = 1'b0; auto_mode = 1'b0; cfg_m = '0; cfg_n = '0;
    clear_len = 0;
    #500 rst_n = 1'b0;
    #5000 rst_n = 1'b1;
    repeat (10) @(posedge clk);
    check(clear_runs.size() == 1 && clear_runs[0] == CLR - 1, "clear after reset");
    check(!busy && trig_cyc.size() == 0, "idle without start");

    // single operation
    write_code(3, 6);
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (PERIOD + 20) @(posedge clk);
    check(trig_cyc.size() == 1, "one trigger for one start");
    check(m_at_trig.size() == 1 && m_at_trig[0] == 3 && n_at_trig[0] == 6, "code latched (3,6)");
    check(clear_runs.size() == 2 && clear_runs[1] == CLR, "clear of CLEAR_CYCLES after the operation");
    check(ops_done == 1, "one operation counted");
    check(!busy, "idle again");

    // a write in the middle of an operation does not reach the running code
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    repeat (50) @(posedge clk);
    write_code(200, 52);
    #1;
    check(m_act == 3 && n_act == 6, "running code held during a host write");
    repeat (PERIOD) @(posedge clk);

    // auto mode: back-to-back operations, one per PERIOD cycles
    t0 = trig_cyc.size();
    @(negedge clk); auto_mode = 1'b1;
    repeat (5 * PERIOD + 10) @(posedge clk);
    @(negedge clk); auto_mode = 1'b0;
    check(trig_cyc.size() - t0 >= 5, $sformatf("%0d auto triggers", trig_cyc.size() - t0));
    for (int i = t0 + 1; i < trig_cyc.size(); i++)
      check(trig_cyc[i] - trig_cyc[i-1] == PERIOD,
            $sformatf("auto trigger spacing %0d cycles", trig_cyc[i] - trig_cyc[i-1]));
    check(m_at_trig[t0] == 200 && n_at_trig[t0] == 52, "new code used from the next operation");
    repeat (PERIOD + 10) @(posedge clk);
    check(!busy, "auto mode stops after it is released");
    check(ops_done == 16'(trig_cyc.size()), "every trigger completes an operation");
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
