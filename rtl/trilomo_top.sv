// trilomo_top: digital part of the programmable trigger logic board.
//
// Data path: the 16 trigger inputs arrive (after the board's level converters
// and programmable delay lines) on trig_in and go through the two-stage LUT
// network to the output pulse shaper and trig_out; LUT 0's output leaves
// unshaped on trig_out_extra. No clock lies on this path up to the leading edge
// of trig_out.
//
// Control path: a VME master reaches the FPGA registers through the CPLD's VME
// slave (A32/D32, base address A[31:16] = addr_sw) and the 16-bit address /
// 32-bit data local bus. The CPLD also holds the loader that configures the
// FPGA over VME through the cfg_* pins. The registers program the 80 LUT bits, the output
// pulse width and the 16 delay settings; the delay programmer loads a setting
// into the delay chips over dly_d and, through the decoder, one of the 16
// active-low latch enables dly_len_n.
//
// One clock `clk` (assumed 200 MHz, so that one pulse-width step is 5 ns) runs
// the CPLD and the FPGA logic; rst_n is an asynchronous active-low reset. The
// partition into CPLD, FPGA and decoder follows the published board diagram;
// the single clock is this design's choice.
module trilomo_top
  import trilomo_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // VME bus, after the bus drivers
  input  logic [15:0]           addr_sw,
  input  logic                  vme_as_n,
  input  logic [1:0]            vme_ds_n,
  input  logic                  vme_write_n,
  input  logic                  vme_lword_n,
  input  logic [5:0]            vme_am,
  input  logic [31:1]           vme_a,
  input  logic [31:0]           vme_d_in,
  output logic [31:0]           vme_d_out,
  output logic                  vme_d_oe,
  output logic                  vme_dtack_n,
  // trigger inputs and outputs
  input  logic [N_INPUTS-1:0]   trig_in,
  output logic                  trig_out,
  output logic                  trig_out_extra,
  // delay chip programming
  output logic [DELAY_BITS-1:0] dly_d,
  output logic [N_DELAY-1:0]    dly_len_n,
  // FPGA serial configuration (driven by the CPLD)
  output logic                  cfg_prog_n,
  output logic                  cfg_cclk,
  output logic                  cfg_din,
  input  logic                  cfg_init_n,
  input  logic                  cfg_done
);

  logic [LB_ADDR_W-1:0] lb_addr;
  logic [LB_DATA_W-1:0] lb_wdata, lb_rdata;
  logic                 lb_wr, lb_rd, lb_ack;

  logic [LUT_IN-1:0]    lut_addr;
  logic                 sel_write, wr_data, wr_strobe;
  logic [N_LUTS-1:0]    wr_ram, ram_out;
  logic                 trig_lut;
  logic [PW_W-1:0]      pulse_width;

  logic                 dly_set_valid;
  logic [3:0]           dly_set_idx;
  logic [DELAY_BITS-1:0] dly_set_val;
  delay_array_t         dly_values;
  logic                 dly_busy;
  logic [N_DELAY-1:0]   dly_pending;
  logic [3:0]           dly_addr;
  logic                 dly_en;

  vme_cpld u_cpld (
    .clk, .rst_n, .addr_sw,
    .vme_as_n, .vme_ds_n, .vme_write_n, .vme_lword_n, .vme_am, .vme_a, .vme_d_in,
    .vme_d_out, .vme_d_oe, .vme_dtack_n,
    .lb_addr, .lb_wdata, .lb_wr, .lb_rd, .lb_rdata, .lb_ack,
    .cfg_prog_n, .cfg_cclk, .cfg_din, .cfg_init_n, .cfg_done
  );

  trilomo_regs u_regs (
    .clk, .rst_n,
    .lb_addr, .lb_wdata, .lb_wr, .lb_rd, .lb_rdata, .lb_ack,
    .lut_addr, .sel_write, .wr_ram, .wr_data, .wr_strobe, .ram_out,
    .pulse_width,
    .dly_set_valid, .dly_set_idx, .dly_set_val, .dly_values, .dly_busy, .dly_pending
  );

  trigger_lut_logic u_lut (
    .clk, .trig_in, .sel_write, .lut_addr, .wr_ram, .wr_data, .wr_strobe,
    .trig_lut, .trig_extra (trig_out_extra), .ram_out
  );

  pulse_shaper #(.PW_W(PW_W)) u_pulse (
    .clk, .rst_n, .trig (trig_lut), .width (pulse_width), .pulse (trig_out)
  );

  delay_programmer #(.N_CH(N_DELAY), .DELAY_BITS(DELAY_BITS)) u_dprog (
    .clk, .rst_n,
    .set_valid (dly_set_valid), .set_idx (dly_set_idx), .set_val (dly_set_val),
    .values (dly_values), .busy (dly_busy), .pending (dly_pending),
    .dly_d, .dly_addr, .dly_en
  );

  delay_decoder #(.N_CH(N_DELAY)) u_dec (
    .addr (dly_addr), .en (dly_en), .len_n (dly_len_n)
  );

endmodule
