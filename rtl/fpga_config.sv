// fpga_config: loads the FPGA's configuration over VME, from the CPLD.
//
// Besides loading from its PROM after power-up, the FPGA can be configured
// over VME. This block drives the FPGA's serial configuration pins: PROGRAM
// (active low, clears the FPGA), CCLK and DIN (a bit is taken on each rising
// CCLK edge), and reads back INIT (high once the FPGA is ready for data) and
// DONE (high when configuration has completed).
//
// Registers, selected by `sel` (offsets 0x00, 0x04, 0x08 in the CPLD's range):
//   CTRL   rw  [0] prog: 1 holds PROGRAM low.
//   STATUS r   [0] INIT, [1] DONE, [2] shifter busy (INIT and DONE through two
//              flip-flops).
//   DATA   w   32 configuration bits, sent MSB first. A write while the
//              shifter is still busy is held and acknowledged only when the
//              shifter takes it, so the VME cycle stalls instead of losing
//              data.
// Every other access is acknowledged one clock after its strobe. Each bit
// takes 2*CCLK_HALF clocks: CCLK low with DIN set, then CCLK high; at 200 MHz
// and CCLK_HALF = 2 that is a 50 MHz CCLK.
//
// Loading the FPGA over VME is a function the published design names; the
// register layout, the stall and the CCLK rate are this design's choice, and
// the pin protocol is the FPGA vendor's slave-serial mode.
module fpga_config #(
  parameter int CCLK_HALF = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [1:0]  sel,        // 0 CTRL, 1 STATUS, 2 DATA
  input  logic        wr,
  input  logic        rd,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  output logic        ack,
  output logic        cfg_prog_n,
  output logic        cfg_cclk,
  output logic        cfg_din,
  input  logic        cfg_init_n,
  input  logic        cfg_done
);

  localparam int TW = 8;

  typedef enum logic [1:0] {C_IDLE, C_LOW, C_HIGH} cstate_t;

  cstate_t       state;
  logic          prog;
  logic [1:0]    init_sync, done_sync;
  logic [31:0]   sr;
  logic [5:0]    nbits;
  logic [TW-1:0] timer;
  logic          pend;
  logic [31:0]   pend_data;
  logic          busy;

  always_comb busy = (state != C_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      init_sync <= '0;
      done_sync <= '0;
    end else begin
      init_sync <= {init_sync[0], cfg_init_n};
      done_sync <= {done_sync[0], cfg_done};
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state     <= C_IDLE;
      prog      <= 1'b0;
      sr        <= '0;
      nbits     <= '0;
      timer     <= '0;
      pend      <= 1'b0;
      pend_data <= '0;
      ack       <= 1'b0;
      rdata     <= '0;
      cfg_cclk  <= 1'b0;
      cfg_din   <= 1'b0;
    end else begin
      ack <= 1'b0;
      // shifter
      case (state)
        C_IDLE:
          if (pend) begin
            pend     <= 1'b0;
            ack      <= 1'b1;
            sr       <= pend_data;
            nbits    <= 6'd32;
            cfg_din  <= pend_data[31];
            cfg_cclk <= 1'b0;
            timer    <= TW'(CCLK_HALF - 1);
            state    <= C_LOW;
          end
        C_LOW:
          if (timer == '0) begin
            cfg_cclk <= 1'b1;
            timer    <= TW'(CCLK_HALF - 1);
            state    <= C_HIGH;
          end else timer <= timer - 1'b1;
        C_HIGH:
          if (timer == '0) begin
            cfg_cclk <= 1'b0;
            sr       <= sr << 1;
            nbits    <= nbits - 1'b1;
            if (nbits == 6'd1) state <= C_IDLE;
            else begin
              cfg_din <= sr[30];
              timer   <= TW'(CCLK_HALF - 1);
              state   <= C_LOW;
            end
          end else timer <= timer - 1'b1;
        default: state <= C_IDLE;
      endcase
      // register accesses (after the shifter, so a new DATA write is never lost)
      if (wr && sel == 2'd0) begin
        prog <= wdata[0];
        ack  <= 1'b1;
      end
      if (wr && sel == 2'd2) begin
        pend      <= 1'b1;
        pend_data <= wdata;
      end
      if (wr && sel != 2'd0 && sel != 2'd2) ack <= 1'b1;
      if (rd) begin
        ack   <= 1'b1;
        rdata <= '0;
        if (sel == 2'd0) rdata <= {31'd0, prog};
        if (sel == 2'd1) rdata <= {29'd0, busy, done_sync[1], init_sync[1]};
      end
    end

  assign cfg_prog_n = ~prog;

endmodule
