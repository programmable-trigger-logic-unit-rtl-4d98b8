// delay_programmer_tb: checks that every delay setting written reaches the
// right delay chip.
//
// A shadow model of the 16 chip latches takes dly_d into chip dly_addr at the
// end of each strobe (falling dly_en). Data and address must not change while
// the strobe is high and must be stable for the setup clock before it. The test
// writes single channels, a burst of all 16, and a channel rewritten while it
// is loading, then compares the latches, the read-back values, busy and
// pending, and the time one load takes (T_SETUP + T_STROBE + T_HOLD + 1 clocks).
module delay_programmer_tb;
  logic clk = 0, rst_n = 1;
  logic set_valid = 0;
  logic [3:0] set_idx = '0;
  logic [9:0] set_val = '0;
  logic [15:0][9:0] values;
  logic busy;
  logic [15:0] pending;
  logic [9:0] dly_d;
  logic [3:0] dly_addr;
  logic dly_en;
  int checks = 0, failures = 0;
  logic [9:0] chip [16];
  logic [9:0] expv [16];
  logic [9:0] d_at_rise;
  logic [3:0] a_at_rise;
  int loads = 0;

  delay_programmer dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  always @(posedge dly_en) begin
    d_at_rise = dly_d;
    a_at_rise = dly_addr;
  end
  always @(negedge dly_en) begin
    check(dly_d == d_at_rise && dly_addr == a_at_rise, "data stable during strobe");
    chip[dly_addr] = dly_d;
    loads++;
  end

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input int idx, input logic [9:0] v);
    @(negedge clk);
    set_valid = 1; set_idx = 4'(idx); set_val = v;
    expv[idx] = v;
    @(negedge clk);
    set_valid = 0;
  endtask

  task automatic wait_idle();
    do @(negedge clk); while (busy || pending != 0);
  endtask

  task automatic compare(input string what);
    for (int i = 0; i < 16; i++) begin
      check(chip[i] == expv[i], $sformatf("%s: chip %0d holds %0d, expected %0d", what, i, chip[i], expv[i]));
      check(values[i] == expv[i], $sformatf("%s: read-back %0d", what, i));
    end
  endtask

  initial begin
    int t0, t1;
    for (int i = 0; i < 16; i++) begin chip[i] = '0; expv[i] = '0; end
    #1 rst_n = 0;
    #21 rst_n = 1;
    // one load, timed
    @(negedge clk);
    set_valid = 1; set_idx = 4'd5; set_val = 10'd1023; expv[5] = 10'd1023;
    t0 = int'($realtime);
    @(negedge clk);
    set_valid = 0;
    check(pending == 16'h0020 || busy, "pending/busy after write");
    wait_idle();
    t1 = int'($realtime);
    check((t1 - t0) / 10 == 2 + 2 + 2 + 1 + 1, $sformatf("one load took %0d clocks", (t1 - t0) / 10));
    compare("single");
    // all 16, back to back, random values
    for (int i = 15; i >= 0; i--) write(i, 10'($urandom));
    check(pending != 0, "several pending");
    wait_idle();
    compare("burst");
    // rewrite the channel being loaded
    write(3, 10'd100);
    @(negedge clk);
    write(3, 10'd777);
    wait_idle();
    compare("rewrite while loading");
    check(loads == 1 + 16 + 2 || loads == 1 + 16 + 1, $sformatf("load count %0d", loads));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
