// tb_pulse_width_reshaper -- checks that every input pulse, narrow or wide,
// comes out as one pulse of width T_p, T_DFF + T_p after its rising edge.
module tb_pulse_width_reshaper;
  timeunit 1ps;
  timeprecision 10fs;

  localparam realtime TP   = 2000.0;
  localparam realtime TDFF = 550.0;
  logic in, out;
  realtime t_rise[$], t_fall[$];
  realtime t_in[$];
  int checks = 0, failures = 0;

  pulse_width_reshaper #(.TP_PS(TP), .T_DFF_PS(TDFF)) dut (.in(in), .out(out));

  always @(posedge out) t_rise.push_back($realtime);
  always @(negedge out) t_fall.push_back($realtime);

  function automatic bit near(realtime a, realtime b);
    return (a - b < 0.05) && (b - a < 0.05);
  endfunction

  initial begin
    realtime widths[4] = '{600.0, 1500.0, 3000.0, 7000.0};
    in = 1'b0;
    #20000;  // let any power-up state of the flip-flop clear itself
    t_rise.delete(); t_fall.delete();
    foreach (widths[i]) begin
      t_in.push_back($realtime);
      in = 1'b1; #(widths[i]); in = 1'b0;
      #15000;
    end
    checks++;
    if (t_rise.size() != 4 || t_fall.size() != 4) begin
      failures++;
      $display("FAIL: %0d rising, %0d falling edges", t_rise.size(), t_fall.size());
    end else begin
      foreach (t_in[i]) begin
        checks += 2;
        if (!near(t_rise[i], t_in[i] + TDFF + TP)) begin
          failures++; $display("FAIL: pulse %0d rises at %0.2f", i, t_rise[i]);
        end
        if (!near(t_fall[i] - t_rise[i], TP)) begin
          failures++; $display("FAIL: pulse %0d width %0.2f", i, t_fall[i] - t_rise[i]);
        end
      end
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
