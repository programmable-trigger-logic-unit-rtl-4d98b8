// pulse_shaper_tb: checks the output pulse of the trigger.
//
// 200 MHz clock (5 ns). For every width setting 0..7 and many random phases of
// the trigger edge against the clock it checks: the output rises at the same
// simulation time as the trigger (no clock on the leading edge); the pulse
// lasts more than w and at most w+1 clock periods, with w the setting clamped
// to 1..6 (5 ns to 30 ns); a second trigger edge during the pulse does not
// extend it; the shaper re-arms for the next trigger.
module pulse_shaper_tb;
  logic clk = 0, rst_n = 1, trig = 0;
  logic [2:0] width = 3'd1;
  logic pulse;
  int checks = 0, failures = 0;
  realtime t_rise, t_fall;

  localparam realtime TCLK = 5.0;

  pulse_shaper dut (.clk, .rst_n, .trig, .width, .pulse);

  always #(TCLK / 2) clk = ~clk;

  always @(posedge pulse) t_rise = $realtime;
  realtime t_fall_seen;
  always @(negedge pulse) t_fall_seen = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int weff;
    realtime t0, len;
    #1 rst_n = 0;
    #11 rst_n = 1;
    #20;
    check(pulse == 0, "low after reset");
    for (int w = 0; w < 8; w++) begin
      width = 3'(w);
      weff = (w < 1) ? 1 : (w > 6) ? 6 : w;
      for (int n = 0; n < 20; n++) begin
        #(real'($urandom_range(0, 499)) / 100.0);
        t0 = $realtime;
        trig = 1;
        #0.001;
        check(pulse == 1 && t_rise == t0, $sformatf("leading edge w=%0d", w));
        // second edge inside the pulse when the pulse is long enough
        #1.5 trig = 0;
        if (weff >= 2) begin
          #1.5 trig = 1;
          #1.5 trig = 0;
        end
        if (pulse) begin
          @(negedge pulse);
          t_fall = $realtime;
        end else t_fall = t_fall_seen;  // already over
        len = t_fall - t_rise;
        check(len > weff * TCLK && len <= (weff + 1) * TCLK,
              $sformatf("width w=%0d len=%0.3f ns", w, len));
        #(2 * TCLK);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
