// trilomo_top_tb: end-to-end test of the trigger logic board at its default
// sizes, driven only through the VME bus and the trigger connectors.
//
// Around the design it places a VME master model and sixteen delay-chip models
// fed by the design's delay bus. The trigger inputs arrive with a random cable
// skew of up to 8 ns per channel. The test:
//   1. programs each delay line to cancel its channel's skew (setting =
//      (max skew - skew) / 10 ps, plus 200 ps common to all) and checks, from
//      the chip models, that every chip latched its value and that a common
//      edge now reaches all 16 FPGA inputs at the same time;
//   2. switches to write mode, writes all 80 LUT bits (a 2-of-4 coincidence in
//      each group, combined as "groups 0 and 1, or group 2 without group 3"),
//      reads them back through LUT_READ, and switches back to standard mode;
//   3. applies random input patterns and checks the extra output (LUT 0) and
//      the trigger output: a pulse exactly when the reference function is
//      true, starting with no delay after the aligned inputs, and lasting
//      more than w and at most w+1 clock periods for widths 0 (clamped to 1),
//      1, 3 and 6;
//   4. sends a second decision inside a long pulse and checks that it does
//      not extend it, and sends VME cycles to another board address and with
//      an A24 modifier, which must get no answer.
//   0. (first) loads a 128-bit configuration into a model of the FPGA's
//      serial port over VME, back to back so that data writes stall until the
//      loader's shifter is free, and checks DONE and every bit.
// Each mechanism is counted; one that never happened counts as a failure.
module trilomo_top_tb;
  import trilomo_pkg::*;

  localparam realtime TCLK = 5.0;       // 200 MHz
  localparam logic [15:0] BASE = 16'h00E1;
  localparam int DSET_OFS = 20;         // 200 ps common to all channels
  localparam real T_ALIGN_OFS = 0.2;

  logic clk = 0, rst_n = 1;
  logic [15:0] addr_sw = BASE;
  logic vme_as_n, vme_write_n, vme_lword_n;
  logic [1:0] vme_ds_n;
  logic [5:0] vme_am;
  logic [31:1] vme_a;
  logic [31:0] vme_d_in, vme_d_out;
  logic vme_d_oe, vme_dtack_n;
  logic [15:0] raw_in = '0;     // at the front connectors
  logic [15:0] skewed;          // after the cables
  logic [15:0] trig_in;         // after the delay chips
  logic trig_out, trig_out_extra;
  logic [9:0] dly_d;
  logic [15:0] dly_len_n;
  logic cfg_prog_n, cfg_cclk, cfg_din, cfg_init_n, cfg_done;

  int checks = 0, failures = 0;
  int n_delay_load = 0, n_aligned = 0, n_mode_switch = 0, n_lut_write = 0,
      n_readback = 0, n_pulse = 0, n_clamp = 0, n_retrig_blocked = 0,
      n_vme_ignored = 0, n_extra = 0, n_config = 0, n_cfg_stall = 0;

  real skew_ns [16];
  logic [9:0] skew_code [16];
  logic [15:0] lut [5];
  logic [9:0] dset [16];
  logic [9:0] chip_setting [16];
  realtime tin [16];

  trilomo_top dut (.*);

  fpga_serial_model #(.N_BITS(128)) u_fpga (
    .prog_n (cfg_prog_n), .cclk (cfg_cclk), .din (cfg_din), .init_n (cfg_init_n), .done (cfg_done)
  );

  vme_master bfm (
    .as_n (vme_as_n), .ds_n (vme_ds_n), .write_n (vme_write_n), .lword_n (vme_lword_n),
    .am (vme_am), .a (vme_a), .d (vme_d_in), .d_slave (vme_d_out), .d_oe (vme_d_oe),
    .dtack_n (vme_dtack_n)
  );

  for (genvar i = 0; i < 16; i++) begin : g_ch
    cable_model u_cable (.in (raw_in[i]), .skew_10ps (skew_code[i]), .out (skewed[i]));
    mc100ep195_model u_delay (.in (skewed[i]), .d (dly_d), .len (dly_len_n[i]), .q (trig_in[i]));
    always_comb chip_setting[i] = u_delay.setting;
    always @(posedge trig_in[i]) tin[i] = $realtime;
  end

  always #(TCLK / 2) clk = ~clk;

  // trigger output edges
  realtime t_rise, t_fall;
  int n_rises = 0;
  always @(posedge trig_out) begin t_rise = $realtime; n_rises++; end
  always @(negedge trig_out) t_fall = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  task automatic vme_wr(input logic [15:0] ad, input logic [31:0] wd);
    logic [31:0] rd;
    bit ack;
    bfm.cycle(1, {BASE, ad}, 6'h09, wd, rd, ack);
    check(ack, $sformatf("VME write %h acknowledged", ad));
  endtask

  task automatic vme_rd(input logic [15:0] ad, output logic [31:0] rd);
    bit ack;
    bfm.cycle(0, {BASE, ad}, 6'h09, 32'h0, rd, ack);
    check(ack, $sformatf("VME read %h acknowledged", ad));
  endtask

  function automatic logic ref_out(input logic [15:0] x, output logic extra);
    logic [3:0] s;
    for (int k = 0; k < 4; k++) s[k] = lut[k][x[4*k +: 4]];
    extra = s[0];
    return lut[4][s];
  endfunction

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    real max_skew;
    realtime t0;
    max_skew = 0.0;
    for (int i = 0; i < 16; i++) begin
      skew_code[i] = 10'($urandom_range(0, 800));
      skew_ns[i] = real'(skew_code[i]) / 100.0;
      if (skew_ns[i] > max_skew) max_skew = skew_ns[i];
    end
    #1 rst_n = 0;
    #21 rst_n = 1;
    #20;

    // ---- 0. configuration over VME
    begin
      logic [31:0] words [4];
      bit ok;
      vme_wr(CFG_CTRL, 32'h1);
      vme_rd(CFG_STATUS, rd);
      check(rd[1:0] == 2'b00 && !cfg_prog_n, "FPGA cleared");
      vme_wr(CFG_CTRL, 32'h0);
      #200;
      vme_rd(CFG_STATUS, rd);
      check(rd[0], "INIT high");
      for (int i = 0; i < 4; i++) begin
        words[i] = $urandom;
        t0 = $realtime;
        vme_wr(CFG_DATA, words[i]);
        if ($realtime - t0 > 32 * 4 * TCLK / 2) n_cfg_stall++;
      end
      #(40 * 4 * TCLK);
      vme_rd(CFG_STATUS, rd);
      check(rd[2:0] == 3'b011 && cfg_done, $sformatf("configuration done, status %b", rd[2:0]));
      ok = (u_fpga.bits.size() == 128);
      for (int i = 0; i < 128 && ok; i++) ok &= (u_fpga.bits[i] == words[i / 32][31 - i % 32]);
      check(ok, "configuration bits at the FPGA");
      if (ok && cfg_done) n_config++;
    end

    // ---- 1. delay lines cancel the cable skew
    for (int i = 0; i < 16; i++) begin
      dset[i] = 10'($rtoi((max_skew - skew_ns[i]) * 100.0 + 0.5) + DSET_OFS);
      vme_wr(16'(REG_DELAY_BASE + 4 * i), 32'(dset[i]));
    end
    do vme_rd(REG_DELAY_STATUS, rd); while (rd != 0);
    for (int i = 0; i < 16; i++) begin
      check(chip_setting[i] == dset[i], $sformatf("delay chip %0d holds %0d", i, dset[i]));
      if (chip_setting[i] == dset[i]) n_delay_load++;
      vme_rd(16'(REG_DELAY_BASE + 4 * i), rd);
      check(rd == 32'(dset[i]), $sformatf("delay read-back %0d", i));
    end
    begin
      bit ok;
      t0 = $realtime;
      raw_in = 16'hFFFF;
      #20;
      ok = 1;
      for (int i = 0; i < 16; i++) ok &= (tin[i] - t0 > max_skew + T_ALIGN_OFS - 0.011) && (tin[i] - t0 < max_skew + T_ALIGN_OFS + 0.011);
      if (!ok) for (int i = 0; i < 16; i++) $display("ch %0d skew %0.3f set %0d arrival %0.3f", i, skew_ns[i], dset[i], tin[i] - t0);
      check(ok, "inputs aligned after delay compensation");
      if (ok) n_aligned++;
      raw_in = '0;
      #20;
    end

    // ---- 2. program the 80 LUT bits in write mode
    for (int k = 0; k < 4; k++)
      for (int i = 0; i < 16; i++) lut[k][i] = ($countones(4'(i)) >= 2);
    for (int i = 0; i < 16; i++) lut[4][i] = (i[0] & i[1]) | (i[2] & ~i[3]);
    vme_wr(REG_LUT_CTRL, 32'h0000_0010);  // write mode
    n_mode_switch++;
    for (int k = 0; k < 5; k++)
      for (int i = 0; i < 16; i++) begin
        lut_ctrl_t c;
        c = '0;
        c.lut_addr = 4'(i); c.sel_write = 1; c.wr_ram = 5'(1 << k); c.data = lut[k][i];
        vme_wr(REG_LUT_CTRL, 32'(c));
        c.clock = 1;
        vme_wr(REG_LUT_CTRL, 32'(c));
        n_lut_write++;
      end
    for (int i = 0; i < 16; i++) begin
      lut_ctrl_t c;
      logic [4:0] e;
      c = '0; c.lut_addr = 4'(i); c.sel_write = 1;
      vme_wr(REG_LUT_CTRL, 32'(c));
      vme_rd(REG_LUT_READ, rd);
      for (int k = 0; k < 5; k++) e[k] = lut[k][i];
      check(rd[4:0] == e, $sformatf("LUT read-back addr %0d: %b exp %b", i, rd[4:0], e));
      if (rd[4:0] == e) n_readback++;
    end
    vme_wr(REG_LUT_CTRL, 32'h0000_0000);  // standard mode
    n_mode_switch++;

    // ---- 3. trigger decisions through the whole chain
    for (int wi = 0; wi < 4; wi++) begin
      int w, weff;
      w = (wi == 0) ? 0 : (wi == 1) ? 1 : (wi == 2) ? 3 : 6;
      weff = (w < 1) ? 1 : w;
      vme_wr(REG_PULSE_WIDTH, 32'(w));
      for (int n = 0; n < 60; n++) begin
        logic [15:0] x;
        logic r, e;
        int r0;
        x = 16'($urandom);
        r = ref_out(x, e);
        r0 = n_rises;
        #(real'($urandom_range(0, 499)) / 100.0);
        t0 = $realtime;
        raw_in = x;
        #(max_skew + 0.5);
        check(trig_out_extra == e, $sformatf("extra output for %h", x));
        if (e) n_extra++;
        #(TCLK * 8);
        check((n_rises - r0) == int'(r), $sformatf("pulses for %h: %0d, expected %0d", x, n_rises - r0, r));
        if (r && n_rises - r0 == 1) begin
          realtime len;
          len = t_fall - t_rise;
          check(t_rise - t0 > max_skew + T_ALIGN_OFS - 0.011 && t_rise - t0 < max_skew + T_ALIGN_OFS + 0.011,
                $sformatf("leading edge %0.3f ns after inputs", t_rise - t0));
          check(len > weff * TCLK && len <= (weff + 1) * TCLK,
                $sformatf("width setting %0d: %0.3f ns", w, len));
          n_pulse++;
          if (w == 0) n_clamp++;
        end
        raw_in = '0;
        #(max_skew + 3 * TCLK);
      end
    end

    // ---- 4a. second decision inside a 30 ns pulse
    begin
      int r0;
      r0 = n_rises;
      raw_in = 16'h0003;            // group 0 fires, no trigger
      #(max_skew + 1.0);
      raw_in = 16'h0033;            // groups 0 and 1: trigger
      #(2 * TCLK);
      raw_in = 16'h0003;            // decision drops
      #1.0;
      raw_in = 16'h0033;            // and rises again inside the pulse
      #(10 * TCLK);
      check(n_rises - r0 == 1, "second decision inside the pulse ignored");
      check(t_fall - t_rise <= 7 * TCLK, "pulse not extended");
      if (n_rises - r0 == 1) n_retrig_blocked++;
      raw_in = '0;
      #(max_skew + 4 * TCLK);
    end

    // ---- 4b. cycles for someone else
    begin
      bit ack;
      bfm.timeout_ns = 400;
      bfm.cycle(1, {BASE ^ 16'h0001, REG_PULSE_WIDTH}, 6'h09, 32'h2, rd, ack);
      check(!ack, "other board address not answered");
      if (!ack) n_vme_ignored++;
      bfm.cycle(0, {BASE, REG_PULSE_WIDTH}, 6'h39, 32'h0, rd, ack);
      check(!ack, "A24 cycle not answered");
      bfm.timeout_ns = 2000;
      vme_rd(REG_PULSE_WIDTH, rd);
      check(rd == 32'd6, "pulse width unchanged by ignored write");
    end

    $display("mechanisms: delay_load=%0d aligned=%0d mode_switch=%0d lut_write=%0d readback=%0d",
             n_delay_load, n_aligned, n_mode_switch, n_lut_write, n_readback);
    $display("            config_load=%0d config_stall=%0d", n_config, n_cfg_stall);
    $display("            pulse=%0d width_clamp=%0d extra_out=%0d retrigger_blocked=%0d vme_ignored=%0d",
             n_pulse, n_clamp, n_extra, n_retrig_blocked, n_vme_ignored);
    begin
      int mech [12];
      mech = '{n_delay_load, n_aligned, n_mode_switch, n_lut_write, n_readback,
               n_pulse, n_clamp, n_extra, n_retrig_blocked, n_vme_ignored,
               n_config, n_cfg_stall};
      foreach (mech[m]) begin
        checks++;
        if (mech[m] == 0) begin
          failures++;
          $display("FAIL mechanism %0d never happened", m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
