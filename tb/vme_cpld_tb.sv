// vme_cpld_tb: checks the VME slave against a local-bus memory model.
//
// A VME master model runs writes and reads; a model of the FPGA side stores
// words by local address and answers each request one or three clocks later.
// Checked: data written over VME arrive at the right local address; reads
// return the stored word; every local request is a single one-clock strobe
// (never read and write together); transfers with another board address, a
// wrong address modifier or LWORD high get no DTACK and no local request;
// DTACK is released after the strobes go high; the data output enable is on
// only for reads. A request the FPGA side never answers (addresses from
// 0x8000 up, in the model) ends without DTACK and without hanging the slave.
// Accesses to 0xFF00-0xFF0C reach the built-in configuration loader, not the
// local bus: PROGRAM, INIT/DONE status and two data words shifted into a model
// of the FPGA's serial port.
module vme_cpld_tb;
  import trilomo_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] addr_sw = 16'hA5C3;
  logic vme_as_n, vme_write_n, vme_lword_n;
  logic [1:0] vme_ds_n;
  logic [5:0] vme_am;
  logic [31:1] vme_a;
  logic [31:0] vme_d_in, vme_d_out;
  logic vme_d_oe, vme_dtack_n;
  logic [15:0] lb_addr;
  logic [31:0] lb_wdata, lb_rdata;
  logic lb_wr, lb_rd, lb_ack;
  int checks = 0, failures = 0;
  int requests = 0;

  logic cfg_prog_n, cfg_cclk, cfg_din, cfg_init_n, cfg_done;
  logic [31:0] mem [int];
  logic [31:0] shadow [int];

  vme_cpld dut (.*);

  fpga_serial_model #(.N_BITS(64)) u_fpga (
    .prog_n (cfg_prog_n), .cclk (cfg_cclk), .din (cfg_din), .init_n (cfg_init_n), .done (cfg_done)
  );

  vme_master bfm (
    .as_n (vme_as_n), .ds_n (vme_ds_n), .write_n (vme_write_n), .lword_n (vme_lword_n),
    .am (vme_am), .a (vme_a), .d (vme_d_in), .d_slave (vme_d_out), .d_oe (vme_d_oe),
    .dtack_n (vme_dtack_n)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  // FPGA-side model: answers after a random 1 or 3 clocks.
  initial begin
    lb_ack = 0; lb_rdata = '0;
    forever begin
      @(posedge clk);
      if (rst_n && (lb_wr || lb_rd)) begin
        logic wr; logic [15:0] ad; logic [31:0] wd;
        requests++;
        wr = lb_wr; ad = lb_addr; wd = lb_wdata;
        check(!(lb_wr && lb_rd), "read and write together");
        if (ad >= 16'h8000) continue;   // the FPGA does not answer here
        @(posedge clk);
        check(!lb_wr && !lb_rd, "strobe longer than one clock");
        if ($urandom_range(0, 1)) repeat (2) @(posedge clk);
        if (wr) mem[int'(ad)] = wd;
        lb_rdata <= mem.exists(int'(ad)) ? mem[int'(ad)] : 32'hDEAD0000;
        lb_ack <= 1;
        @(posedge clk);
        lb_ack <= 0;
      end
    end
  end

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, wd;
    bit ack;
    int r0;
    #1 rst_n = 0;
    #21 rst_n = 1;
    // writes then reads to random word addresses
    for (int i = 0; i < 20; i++) begin
      int ad;
      ad = int'($urandom_range(0, 16'h1FFF)) * 4;
      wd = $urandom;
      bfm.cycle(1, {addr_sw, 16'(ad)}, 6'h09, wd, rd, ack);
      check(ack, "write acknowledged");
      shadow[ad] = wd;
      check(mem.exists(ad) && mem[ad] == wd, $sformatf("write reached local address %h", ad));
    end
    foreach (shadow[ad]) begin
      bfm.cycle(0, {addr_sw, 16'(ad)}, 6'h0D, 32'h0, rd, ack);
      check(ack && rd == shadow[ad], $sformatf("read %h got %h exp %h", ad, rd, shadow[ad]));
    end
    // cycles the board must ignore
    r0 = requests;
    bfm.timeout_ns = 500;
    bfm.cycle(1, {addr_sw ^ 16'h0100, 16'h0010}, 6'h09, 32'h1234, rd, ack);
    check(!ack, "other board address ignored");
    bfm.cycle(1, {addr_sw, 16'h0010}, 6'h39, 32'h1234, rd, ack);
    check(!ack, "A24 modifier ignored");
    check(requests == r0, "no local request for ignored cycles");
    // unanswered request: no DTACK, slave usable afterwards
    bfm.timeout_ns = 2000;
    bfm.cycle(0, {addr_sw, 16'h8004}, 6'h09, 32'h0, rd, ack);
    check(!ack, "unanswered local request gets no DTACK");
    check(requests == r0 + 1, "unanswered request was forwarded once");
    r0 = requests;
    bfm.cycle(1, {addr_sw, 16'h0040}, 6'h09, 32'h5A5A_0001, rd, ack);
    bfm.cycle(0, {addr_sw, 16'h0040}, 6'h09, 32'h0, rd, ack);
    check(ack && rd == 32'h5A5A_0001, "slave answers again after a timeout");
    // configuration loader
    r0 = requests;
    bfm.cycle(1, {addr_sw, CFG_CTRL}, 6'h09, 32'h1, rd, ack);
    check(ack && !cfg_prog_n, "PROGRAM asserted over VME");
    bfm.cycle(0, {addr_sw, CFG_STATUS}, 6'h09, 32'h0, rd, ack);
    check(ack && rd[1:0] == 2'b00, "INIT low while PROGRAM held");
    bfm.cycle(1, {addr_sw, CFG_CTRL}, 6'h09, 32'h0, rd, ack);
    #200;
    bfm.cycle(0, {addr_sw, CFG_STATUS}, 6'h09, 32'h0, rd, ack);
    check(ack && rd[1:0] == 2'b01, "INIT high, DONE low");
    bfm.cycle(1, {addr_sw, CFG_DATA}, 6'h09, 32'hC0DE_F00D, rd, ack);
    check(ack, "first data word");
    bfm.cycle(1, {addr_sw, CFG_DATA}, 6'h09, 32'h1234_5678, rd, ack);
    check(ack, "second data word");
    #2000;
    bfm.cycle(0, {addr_sw, CFG_STATUS}, 6'h09, 32'h0, rd, ack);
    check(ack && rd[2:0] == 3'b011, $sformatf("DONE after 64 bits, status %b", rd[2:0]));
    begin
      logic [63:0] got;
      for (int i = 0; i < 64; i++) got[63 - i] = (i < u_fpga.bits.size()) ? u_fpga.bits[i] : 1'b0;
      check(got == 64'hC0DE_F00D_1234_5678, $sformatf("bits at the FPGA %h", got));
    end
    check(requests == r0, "configuration accesses stay in the CPLD");
    check(bfm.oe_errors == 0, "data output enable only on reads");
    check(vme_dtack_n && !vme_d_oe, "bus released at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
