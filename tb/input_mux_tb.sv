// input_mux_tb: exhaustive check of the four 2:1 LUT address multiplexers.
module input_mux_tb;
  logic sel_write;
  logic [3:0] trig, vme_addr, y;
  int checks = 0, failures = 0;

  input_mux dut (.sel_write, .trig, .vme_addr, .y);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int t = 0; t < 16; t++)
        for (int v = 0; v < 16; v++) begin
          sel_write = s[0]; trig = 4'(t); vme_addr = 4'(v);
          #1;
          checks++;
          if (y !== (s[0] ? 4'(v) : 4'(t))) begin
            failures++;
            $display("FAIL sel=%0d trig=%h vme=%h y=%h", s, t, v, y);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
