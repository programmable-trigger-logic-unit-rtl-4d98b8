// trilomo_regs_tb: checks the FPGA register block on the local bus.
//
// Checked: reset values; LUT_CTRL fields reach their outputs and read back;
// a 0->1 change of the clock field makes exactly one one-clock write strobe
// and holding it at 1 makes no more; LUT_READ returns ram_out; PULSE_WIDTH
// reads back; a DELAY[i] write produces one set request with channel and
// value; DELAY[i] reads return the programmer's values; DELAY_STATUS packs busy
// and pending; unmapped addresses read 0; each request is acknowledged after
// one clock.
module trilomo_regs_tb;
  import trilomo_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] lb_addr = '0;
  logic [31:0] lb_wdata = '0, lb_rdata;
  logic lb_wr = 0, lb_rd = 0, lb_ack;
  logic [3:0] lut_addr;
  logic sel_write, wr_data, wr_strobe;
  logic [4:0] wr_ram;
  logic [4:0] ram_out = 5'h00;
  logic [2:0] pulse_width;
  logic dly_set_valid;
  logic [3:0] dly_set_idx;
  logic [9:0] dly_set_val;
  delay_array_t dly_values;
  logic dly_busy = 0;
  logic [15:0] dly_pending = '0;
  int checks = 0, failures = 0;
  int strobes = 0, sets = 0;
  logic [3:0] last_idx;
  logic [9:0] last_val;

  trilomo_regs dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n && wr_strobe) strobes++;
    if (dly_set_valid) begin sets++; last_idx = dly_set_idx; last_val = dly_set_val; end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  task automatic lb_write(input logic [15:0] ad, input logic [31:0] wd);
    @(negedge clk);
    lb_addr = ad; lb_wdata = wd; lb_wr = 1;
    @(negedge clk);
    lb_wr = 0;
    check(lb_ack, $sformatf("write ack %h", ad));
  endtask

  task automatic lb_read(input logic [15:0] ad, output logic [31:0] rd);
    @(negedge clk);
    lb_addr = ad; lb_rd = 1;
    @(negedge clk);
    lb_rd = 0;
    check(lb_ack, $sformatf("read ack %h", ad));
    rd = lb_rdata;
  endtask

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    for (int i = 0; i < 16; i++) dly_values[i] = 10'(i * 37 + 5);
    #1 rst_n = 0;
    #21 rst_n = 1;
    check(pulse_width == 3'd4 && !sel_write && wr_ram == 0 && !wr_strobe, "reset values");
    // LUT control fields: addr 9, write mode, RAMs 1 and 4, data 1, clock 0
    lb_write(REG_LUT_CTRL, {20'd0, 1'b0, 1'b1, 5'b10010, 1'b1, 4'd9});
    @(negedge clk);
    check(lut_addr == 4'd9 && sel_write && wr_ram == 5'b10010 && wr_data, "LUT_CTRL fields");
    lb_read(REG_LUT_CTRL, rd);
    check(rd == 32'h0000_0659, $sformatf("LUT_CTRL read-back %h", rd));
    check(strobes == 0, "no strobe without clock edge");
    lb_write(REG_LUT_CTRL, {20'd0, 1'b1, 1'b1, 5'b10010, 1'b1, 4'd9});
    repeat (4) @(negedge clk);
    check(strobes == 1, $sformatf("one strobe on clock 0->1 (%0d)", strobes));
    lb_write(REG_LUT_CTRL, {20'd0, 1'b1, 1'b0, 5'b10010, 1'b1, 4'd9});
    repeat (4) @(negedge clk);
    check(strobes == 1, "no strobe while clock stays 1");
    lb_write(REG_LUT_CTRL, {20'd0, 1'b0, 1'b0, 5'b10010, 1'b1, 4'd9});
    lb_write(REG_LUT_CTRL, {20'd0, 1'b1, 1'b0, 5'b10010, 1'b1, 4'd9});
    repeat (4) @(negedge clk);
    check(strobes == 2, "second strobe");
    // read-back of RAM outputs
    ram_out = 5'b10110;
    lb_read(REG_LUT_READ, rd);
    check(rd == 32'h16, "LUT_READ");
    // pulse width
    lb_write(REG_PULSE_WIDTH, 32'h6);
    check(pulse_width == 3'd6, "pulse width set");
    lb_read(REG_PULSE_WIDTH, rd);
    check(rd == 32'h6, "pulse width read-back");
    // delays
    for (int i = 0; i < 16; i++) begin
      int s0;
      logic [9:0] v;
      s0 = sets;
      v = 10'($urandom);
      lb_write(16'(REG_DELAY_BASE + 4 * i), {22'h3FFFFF, v});
      @(negedge clk);
      check(sets == s0 + 1 && last_idx == 4'(i) && last_val == v, $sformatf("delay set %0d", i));
      lb_read(16'(REG_DELAY_BASE + 4 * i), rd);
      check(rd == 32'(dly_values[i]), $sformatf("delay read-back %0d", i));
    end
    dly_busy = 1; dly_pending = 16'h8421;
    lb_read(REG_DELAY_STATUS, rd);
    check(rd == 32'h8421_0001, $sformatf("status %h", rd));
    lb_read(16'h0040, rd);
    check(rd == 0, "unmapped read is 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
