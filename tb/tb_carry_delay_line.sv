// tb_carry_delay_line -- checks the carry-chain delay element: an edge at the
// input reaches tap k after (k+1) DU delays and the output after NUM_DU.
module tb_carry_delay_line;
  timeunit 1ps;
  timeprecision 10fs;

  localparam int unsigned N   = 32;
  localparam realtime     TDU = 38.6;
  logic in, out;
  logic [N-1:0] taps;
  realtime t_tap[N];
  realtime t_out;
  int checks = 0, failures = 0;

  carry_delay_line #(.NUM_DU(N), .T_DU_PS(TDU)) dut (.in(in), .out(out), .taps(taps));

  for (genvar k = 0; k < N; k++) begin : g_mon
    always @(posedge taps[k]) t_tap[k] = $realtime;
  end
  always @(posedge out) t_out = $realtime;

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  initial begin
    in = 1'b0;
    for (int k = 0; k < N; k++) t_tap[k] = -1.0;
    t_out = -1.0;
    #5000;
    in = 1'b1;
    #5000;
    for (int k = 0; k < N; k++) begin
      checks++;
      if (!near(t_tap[k], 5000.0 + real'(k + 1) * TDU)) begin
        failures++;
        $display("FAIL: tap %0d at %0.2f ps", k, t_tap[k]);
      end
    end
    checks++;
    if (!near(t_out, 5000.0 + real'(N) * TDU)) begin
      failures++;
      $display("FAIL: out at %0.2f ps", t_out);
    end
    checks++;
    if (out !== 1'b1) begin failures++; $display("FAIL: out level"); end
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
