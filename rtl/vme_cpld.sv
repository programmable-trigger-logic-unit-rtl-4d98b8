// vme_cpld: VME slave interface of the board, as held by the CPLD.
//
// It watches the VME bus for single D32 transfers in A32 address space
// (address modifier 0x09 or 0x0D, LWORD low, both data strobes low) whose upper
// address A[31:16] equals the board's address switches. For such a transfer it
// issues one read or write on the local bus to the FPGA (16-bit address
// A[15:0], 32-bit data), waits for the FPGA's acknowledge, then pulls DTACK low
// (driving the read data for a read) until the master releases the data
// strobes. Other transfers are ignored and left to the master's bus timeout.
//
// AS and DS are asynchronous to `clk` and pass through two flip-flops; address,
// data, AM and WRITE are sampled once DS is seen low, when the VME protocol
// guarantees them stable. vme_d_oe is the direction control of the external
// bus drivers. Local bus: lb_wr or lb_rd is high for one clock; the FPGA
// answers with lb_ack high for one clock, with lb_rdata valid in that clock.
//
// Offsets CFG_BASE..CFG_BASE+0x0C are not forwarded: they reach the CPLD's own
// FPGA configuration loader (fpga_config), so the FPGA can be loaded over VME
// even while it holds no design. A forwarded request that gets no lb_ack
// within LB_TIMEOUT clocks (an unconfigured FPGA) is dropped without DTACK, and
// the slave waits for the master's bus timeout to release the strobes.
//
// The published design gives the function (A32/D32 VME slave, 16-bit address
// and 32-bit data towards the FPGA, base address from switches); the accepted
// cycle types, the local-bus handshake and the state machine are this design's
// choice.
module vme_cpld
  import trilomo_pkg::*;
#(
  parameter int SW_W       = 16,
  parameter int LB_TIMEOUT = 64,
  parameter int CCLK_HALF  = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [SW_W-1:0]      addr_sw,
  // VME side (active-low strobes)
  input  logic                 vme_as_n,
  input  logic [1:0]           vme_ds_n,
  input  logic                 vme_write_n,
  input  logic                 vme_lword_n,
  input  logic [5:0]           vme_am,
  input  logic [31:1]          vme_a,
  input  logic [31:0]          vme_d_in,
  output logic [31:0]          vme_d_out,
  output logic                 vme_d_oe,
  output logic                 vme_dtack_n,
  // Local bus to the FPGA
  output logic [LB_ADDR_W-1:0] lb_addr,
  output logic [LB_DATA_W-1:0] lb_wdata,
  output logic                 lb_wr,
  output logic                 lb_rd,
  input  logic [LB_DATA_W-1:0] lb_rdata,
  input  logic                 lb_ack,
  // FPGA serial configuration pins
  output logic                 cfg_prog_n,
  output logic                 cfg_cclk,
  output logic                 cfg_din,
  input  logic                 cfg_init_n,
  input  logic                 cfg_done
);

  typedef enum logic [2:0] {V_IDLE, V_WAIT, V_DTACK, V_NOACK} vstate_t;

  vstate_t    state;
  logic [1:0] as_sync;
  logic [1:0] ds_sync;   // 1 = both data strobes low
  logic       as_act;
  logic       ds_act;
  logic       am_ok;
  logic       sel;
  logic       to_cfg;     // current cycle is for the configuration loader
  logic       cfg_wr, cfg_rd, cfg_ack;
  logic [1:0] cfg_sel;
  logic [31:0] cfg_rdata;
  logic [7:0] wait_cnt;
  logic       ack_any;
  logic [31:0] rdata_any;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      as_sync <= '0;
      ds_sync <= '0;
    end else begin
      as_sync <= {as_sync[0], ~vme_as_n};
      ds_sync <= {ds_sync[0], ~vme_ds_n[0] & ~vme_ds_n[1]};
    end

  always_comb begin
    as_act = as_sync[1];
    ds_act = ds_sync[1];
    am_ok  = (vme_am == 6'h09) || (vme_am == 6'h0D);
    sel    = as_act && ds_act && am_ok && !vme_lword_n
             && (vme_a[31:32-SW_W] == addr_sw);
  end

  always_comb begin
    ack_any   = to_cfg ? cfg_ack : lb_ack;
    rdata_any = to_cfg ? cfg_rdata : lb_rdata;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state       <= V_IDLE;
      to_cfg      <= 1'b0;
      cfg_wr      <= 1'b0;
      cfg_rd      <= 1'b0;
      cfg_sel     <= '0;
      wait_cnt    <= '0;
      lb_addr     <= '0;
      lb_wdata    <= '0;
      lb_wr       <= 1'b0;
      lb_rd       <= 1'b0;
      vme_d_out   <= '0;
      vme_d_oe    <= 1'b0;
      vme_dtack_n <= 1'b1;
    end else begin
      lb_wr  <= 1'b0;
      lb_rd  <= 1'b0;
      cfg_wr <= 1'b0;
      cfg_rd <= 1'b0;
      case (state)
        V_IDLE:
          if (sel) begin
            wait_cnt <= '0;
            if (vme_a[LB_ADDR_W-1:4] == CFG_BASE[LB_ADDR_W-1:4]) begin
              to_cfg  <= 1'b1;
              cfg_sel <= vme_a[3:2];
              cfg_wr  <= !vme_write_n;
              cfg_rd  <= vme_write_n;
              lb_wdata <= vme_d_in;
            end else begin
              to_cfg   <= 1'b0;
              lb_addr  <= {vme_a[LB_ADDR_W-1:1], 1'b0};
              lb_wdata <= vme_d_in;
              lb_wr    <= !vme_write_n;
              lb_rd    <= vme_write_n;
            end
            state <= V_WAIT;
          end
        V_WAIT:
          if (ack_any) begin
            vme_d_out   <= rdata_any;
            vme_d_oe    <= vme_write_n;
            vme_dtack_n <= 1'b0;
            state       <= V_DTACK;
          end else if (!to_cfg && wait_cnt == 8'(LB_TIMEOUT - 1)) begin
            state <= V_NOACK;
          end else if (!to_cfg) begin
            wait_cnt <= wait_cnt + 1'b1;
          end
        V_NOACK:
          if (!ds_sync[1] && !ds_sync[0]) state <= V_IDLE;
        V_DTACK:
          if (!ds_sync[1] && !ds_sync[0]) begin
            vme_d_oe    <= 1'b0;
            vme_dtack_n <= 1'b1;
            state       <= V_IDLE;
          end
        default: state <= V_IDLE;
      endcase
    end

  fpga_config #(.CCLK_HALF(CCLK_HALF)) u_cfg (
    .clk, .rst_n,
    .sel (cfg_sel), .wr (cfg_wr), .rd (cfg_rd), .wdata (lb_wdata),
    .rdata (cfg_rdata), .ack (cfg_ack),
    .cfg_prog_n, .cfg_cclk, .cfg_din, .cfg_init_n, .cfg_done
  );

  // Local bus rules: one request at a time, never read and write together.
  a_lb_excl: assert property (@(posedge clk) disable iff (!rst_n) !(lb_wr && lb_rd));
  a_dtack_ds: assert property (@(posedge clk) disable iff (!rst_n)
                               $fell(vme_dtack_n) |-> ds_act);

endmodule
