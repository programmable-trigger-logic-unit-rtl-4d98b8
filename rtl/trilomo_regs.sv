// trilomo_regs: the FPGA's register block on the local bus from the VME CPLD.
//
// Registers (32 bit, byte addresses):
//   0x0000 LUT_CTRL     rw  [3:0] LUT address, [4] select MUX (1 = write mode),
//                           [9:5] write RAM (one bit per LUT 0..4), [10] data,
//                           [11] clock. A 0->1 change of [11] makes one write
//                           strobe: the data bit is written at the LUT address
//                           of every selected LUT (only in write mode).
//   0x0004 LUT_READ     r   [4:0] outputs of LUT 0..4; in write mode this is
//                           the stored bit at the LUT address.
//   0x0008 PULSE_WIDTH  rw  [2:0] output pulse width in clock periods
//                           (1..6 = 5..30 ns at 200 MHz), reset value 4.
//   0x000C DELAY_STATUS r   [0] delay loading busy, [31:16] channels pending.
//   0x0100+4*i DELAY[i] rw  [9:0] delay of input i in 10 ps steps; a write
//                           queues the value for loading into the delay chip.
// Other addresses read as 0 and ignore writes. Every request is acknowledged
// one clock later (lb_ack), read data valid in that clock.
//
// The five LUT programming fields are those of the published wiring diagram;
// their bit positions, the addresses, the read-back and the reset values are
// this design's choice.
module trilomo_regs
  import trilomo_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst_n,
  // local bus
  input  logic [LB_ADDR_W-1:0]   lb_addr,
  input  logic [LB_DATA_W-1:0]   lb_wdata,
  input  logic                   lb_wr,
  input  logic                   lb_rd,
  output logic [LB_DATA_W-1:0]   lb_rdata,
  output logic                   lb_ack,
  // LUT programming
  output logic [LUT_IN-1:0]      lut_addr,
  output logic                   sel_write,
  output logic [N_LUTS-1:0]      wr_ram,
  output logic                   wr_data,
  output logic                   wr_strobe,
  input  logic [N_LUTS-1:0]      ram_out,
  // output pulse
  output logic [PW_W-1:0]        pulse_width,
  // delay lines
  output logic                   dly_set_valid,
  output logic [3:0]             dly_set_idx,
  output logic [DELAY_BITS-1:0]  dly_set_val,
  input  delay_array_t           dly_values,
  input  logic                   dly_busy,
  input  logic [N_DELAY-1:0]     dly_pending
);

  lut_ctrl_t ctrl;
  logic      clock_q;
  logic      is_delay;

  always_comb is_delay = (lb_addr[15:6] == REG_DELAY_BASE[15:6]) && (lb_addr[1:0] == 2'b00);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ctrl          <= '0;
      clock_q       <= 1'b0;
      wr_strobe     <= 1'b0;
      pulse_width   <= PW_RESET;
      dly_set_valid <= 1'b0;
      dly_set_idx   <= '0;
      dly_set_val   <= '0;
      lb_ack        <= 1'b0;
      lb_rdata      <= '0;
    end else begin
      clock_q       <= ctrl.clock;
      wr_strobe     <= ctrl.clock && !clock_q;
      dly_set_valid <= 1'b0;
      lb_ack        <= lb_wr || lb_rd;
      if (lb_wr) begin
        if (lb_addr == REG_LUT_CTRL)    ctrl        <= lut_ctrl_t'(lb_wdata);
        if (lb_addr == REG_PULSE_WIDTH) pulse_width <= lb_wdata[PW_W-1:0];
        if (is_delay) begin
          dly_set_valid <= 1'b1;
          dly_set_idx   <= lb_addr[5:2];
          dly_set_val   <= lb_wdata[DELAY_BITS-1:0];
        end
      end
      if (lb_rd) begin
        lb_rdata <= '0;
        if (lb_addr == REG_LUT_CTRL)     lb_rdata <= LB_DATA_W'(ctrl);
        if (lb_addr == REG_LUT_READ)     lb_rdata <= LB_DATA_W'(ram_out);
        if (lb_addr == REG_PULSE_WIDTH)  lb_rdata <= LB_DATA_W'(pulse_width);
        if (lb_addr == REG_DELAY_STATUS) lb_rdata <= {dly_pending, 15'd0, dly_busy};
        if (is_delay)                    lb_rdata <= LB_DATA_W'(dly_values[lb_addr[5:2]]);
      end
    end

  always_comb begin
    lut_addr  = ctrl.lut_addr;
    sel_write = ctrl.sel_write;
    wr_ram    = ctrl.wr_ram;
    wr_data   = ctrl.data;
  end

endmodule
