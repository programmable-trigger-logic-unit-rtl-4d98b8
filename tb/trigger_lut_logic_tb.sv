// trigger_lut_logic_tb: programs the two-stage LUT network and checks the
// trigger decision against a reference model for all 65536 input patterns.
//
// For each of several functions (random 80-bit contents and a hand-made
// "2-of-4 groups coincide" function) the 80 bits are written one by one in
// write mode, read back through ram_out, and then every input pattern is
// applied in standard mode and trig_lut / trig_extra are compared, with no
// clock edge in between (the decision path is combinational). A write strobe
// in standard mode must not change the stored function.
module trigger_lut_logic_tb;
  import trilomo_pkg::*;

  logic clk = 0;
  logic [15:0] trig_in = '0;
  logic sel_write = 0;
  logic [3:0] lut_addr = '0;
  logic [4:0] wr_ram = '0;
  logic wr_data = 0, wr_strobe = 0;
  logic trig_lut, trig_extra;
  logic [4:0] ram_out;
  int checks = 0, failures = 0;
  logic [15:0] lut [5];

  trigger_lut_logic dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_out(input logic [15:0] x, output logic extra);
    logic [3:0] s;
    for (int k = 0; k < 4; k++) s[k] = lut[k][x[4*k +: 4]];
    extra = s[0];
    return lut[4][s];
  endfunction

  task automatic program_all();
    @(negedge clk);
    sel_write = 1;
    for (int k = 0; k < 5; k++)
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        lut_addr = 4'(i); wr_ram = 5'(1 << k); wr_data = lut[k][i]; wr_strobe = 1;
        @(negedge clk);
        wr_strobe = 0;
      end
    // read back in write mode
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      lut_addr = 4'(i);
      #1;
      for (int k = 0; k < 5; k++) begin
        checks++;
        if (ram_out[k] !== lut[k][i]) begin
          failures++;
          $display("FAIL read-back LUT %0d addr %0d", k, i);
        end
      end
    end
    @(negedge clk);
    sel_write = 0; wr_ram = '0;
  endtask

  task automatic sweep(input string name);
    logic e, r;
    int bad = 0;
    for (int x = 0; x < 65536; x++) begin
      trig_in = 16'(x);
      #1;
      r = ref_out(16'(x), e);
      checks++;
      if (trig_lut !== r || trig_extra !== e) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s in=%h out=%b/%b exp=%b/%b", name, x, trig_lut, trig_extra, r, e);
      end
    end
  endtask

  initial begin
    // power-up: all LUTs zero
    for (int k = 0; k < 5; k++) lut[k] = '0;
    sweep("power-up");
    for (int f = 0; f < 3; f++) begin
      for (int k = 0; k < 5; k++) lut[k] = 16'($urandom);
      program_all();
      sweep($sformatf("random function %0d", f));
    end
    // group k fires if at least 2 of its 4 inputs are high; trigger if
    // groups 0 and 1 fire, or group 2 fires without group 3 (veto).
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 16; i++) lut[k][i] = ($countones(4'(i)) >= 2);
    for (int i = 0; i < 16; i++) lut[4][i] = (i[0] & i[1]) | (i[2] & ~i[3]);
    program_all();
    sweep("coincidence with veto");
    // a write strobe in standard mode must not write
    @(negedge clk);
    trig_in = 16'h0000; wr_ram = 5'h1F; wr_data = 1; lut_addr = 4'h0;
    wr_strobe = 1;
    @(negedge clk);
    wr_strobe = 0; wr_ram = '0;
    sweep("after strobe in standard mode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
