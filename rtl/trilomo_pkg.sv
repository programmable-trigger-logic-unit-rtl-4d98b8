// trilomo_pkg: sizes, register map and shared types of the programmable trigger
// logic unit.
//
// The unit combines 16 trigger inputs through a two-stage network of 16x1
// look-up-table RAMs (four first-stage LUTs of four inputs each, one
// second-stage LUT), 80 bits in all. The numbers 16, 4, 5, 80 and the 10-bit
// delay setting (10 ps steps up to 10.23 ns) come from the published design;
// the register addresses and bit positions below are this design's choice.
package trilomo_pkg;

  localparam int N_INPUTS    = 16;  // trigger inputs
  localparam int LUT_IN      = 4;   // address lines of one LUT
  localparam int LUT_BITS    = 16;  // bits stored in one LUT
  localparam int N_STAGE1    = 4;   // first-stage LUTs
  localparam int N_LUTS      = 5;   // four first-stage LUTs + one second-stage LUT
  localparam int DELAY_BITS  = 10;  // 10 ps steps, 0..1023 -> up to 10.23 ns
  localparam int N_DELAY     = 16;  // one delay line per trigger input
  localparam int LB_ADDR_W   = 16;  // local bus between VME CPLD and FPGA
  localparam int LB_DATA_W   = 32;
  localparam int PW_W        = 3;   // output pulse width field, in clock periods

  // Local-bus register map (byte addresses, 32-bit registers).
  localparam logic [LB_ADDR_W-1:0] REG_LUT_CTRL     = 16'h0000;
  localparam logic [LB_ADDR_W-1:0] REG_LUT_READ     = 16'h0004;
  localparam logic [LB_ADDR_W-1:0] REG_PULSE_WIDTH  = 16'h0008;
  localparam logic [LB_ADDR_W-1:0] REG_DELAY_STATUS = 16'h000C;
  localparam logic [LB_ADDR_W-1:0] REG_DELAY_BASE   = 16'h0100;  // + 4*channel
  // Handled inside the VME CPLD (FPGA configuration loader), not forwarded.
  localparam logic [LB_ADDR_W-1:0] CFG_BASE         = 16'hFF00;
  localparam logic [LB_ADDR_W-1:0] CFG_CTRL         = 16'hFF00;
  localparam logic [LB_ADDR_W-1:0] CFG_STATUS       = 16'hFF04;
  localparam logic [LB_ADDR_W-1:0] CFG_DATA         = 16'hFF08;

  localparam logic [PW_W-1:0] PW_RESET = 3'd4;  // 20 ns at 200 MHz

  // LUT programming register: the five fields wired from the VME interface to
  // the LUT network.
  typedef struct packed {
    logic [19:0]       unused;
    logic              clock;      // 0->1 writes one bit
    logic              data;       // bit to write
    logic [N_LUTS-1:0] wr_ram;     // which RAM(s) take the bit
    logic              sel_write;  // 1 = write mode, multiplexers pass lut_addr
    logic [LUT_IN-1:0] lut_addr;   // address inside the LUT
  } lut_ctrl_t;

  typedef logic [N_DELAY-1:0][DELAY_BITS-1:0] delay_array_t;

endpackage
