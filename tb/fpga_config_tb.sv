// fpga_config_tb: checks the FPGA configuration loader against a model of the
// FPGA's slave-serial port.
//
// Checked: CTRL drives PROGRAM and reads back; STATUS shows INIT and DONE (and
// the shifter busy bit); data words arrive at the FPGA MSB first, bit for bit;
// CCLK runs at one bit per 2*CCLK_HALF clocks (32 bits in 128 clocks at the
// default); a second DATA write while the shifter is busy is acknowledged only
// when the first word is out (the stall); DONE rises after the last bit.
module fpga_config_tb;
  localparam int NWORDS = 4;
  localparam int CCLK_WAIT = 8;   // last CCLK high phase plus INIT/DONE synchronisers

  logic clk = 0, rst_n = 1;
  logic [1:0] sel = '0;
  logic wr = 0, rd = 0;
  logic [31:0] wdata = '0, rdata;
  logic ack;
  logic cfg_prog_n, cfg_cclk, cfg_din, cfg_init_n, cfg_done;
  int checks = 0, failures = 0;
  logic [31:0] words [NWORDS];
  int stalls = 0;

  fpga_config dut (.*);
  fpga_serial_model #(.N_BITS(32 * NWORDS)) u_fpga (
    .prog_n (cfg_prog_n), .cclk (cfg_cclk), .din (cfg_din), .init_n (cfg_init_n), .done (cfg_done)
  );

  always #2.5 clk = ~clk;   // 200 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  // one register access; returns the clocks until ack
  task automatic access(input bit w, input logic [1:0] s, input logic [31:0] d,
                        output logic [31:0] r, output int clocks);
    @(negedge clk);
    sel = s; wdata = d; wr = w; rd = !w;
    @(negedge clk);
    wr = 0; rd = 0;
    clocks = 1;
    while (!ack && clocks < 1000) begin @(negedge clk); clocks++; end
    check(ack, $sformatf("ack for sel %0d", s));
    r = rdata;
  endtask

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int c, t0, t1;
    #1 rst_n = 0;
    #10 rst_n = 1;
    check(cfg_prog_n && !cfg_cclk, "idle pins after reset");
    access(1, 2'd0, 32'h1, r, c);
    check(!cfg_prog_n, "PROGRAM low");
    access(0, 2'd0, 32'h0, r, c);
    check(r == 32'h1, "CTRL read-back");
    #50;
    access(0, 2'd1, 32'h0, r, c);
    check(r[1:0] == 2'b00, "INIT and DONE low while cleared");
    access(1, 2'd0, 32'h0, r, c);
    check(cfg_prog_n, "PROGRAM released");
    #150;
    access(0, 2'd1, 32'h0, r, c);
    check(r[0] == 1'b1 && r[1] == 1'b0, "INIT high, DONE low");
    for (int i = 0; i < NWORDS; i++) words[i] = $urandom;
    t0 = int'($realtime / 5.0);
    for (int i = 0; i < NWORDS; i++) begin
      access(1, 2'd2, words[i], r, c);
      if (c > 2) stalls++;
      if (i > 0) check(c > 100, $sformatf("word %0d waited for the shifter (%0d clocks)", i, c));
    end
    wait (cfg_done == 1'b1 || $realtime > 50000);
    t1 = int'($realtime / 5.0);
    check(cfg_done, "DONE after the last bit");
    check(u_fpga.bits.size() == 32 * NWORDS, $sformatf("%0d bits arrived", u_fpga.bits.size()));
    for (int i = 0; i < NWORDS; i++)
      for (int b = 0; b < 32; b++)
        if (32 * i + b < u_fpga.bits.size())
          check(u_fpga.bits[32 * i + b] == words[i][31 - b], $sformatf("word %0d bit %0d", i, 31 - b));
    check(t1 - t0 >= NWORDS * 128 && t1 - t0 <= NWORDS * 128 + 16,
          $sformatf("%0d words took %0d clocks", NWORDS, t1 - t0));
    check(stalls == NWORDS - 1, $sformatf("stalls %0d", stalls));
    repeat (CCLK_WAIT) @(negedge clk);
    access(0, 2'd1, 32'h0, r, c);
    check(r[2:0] == 3'b011, $sformatf("status after load %b", r[2:0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
