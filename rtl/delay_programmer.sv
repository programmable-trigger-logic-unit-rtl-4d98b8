// delay_programmer: keeps the 16 input-delay settings and loads them into the
// delay chips.
//
// Each trigger input passes through a programmable delay line set in 10 ps
// steps (10-bit value, 0..1023, up to 10.23 ns). A write (set_valid, set_idx,
// set_val) stores the value and marks the channel pending. When idle, the
// programmer takes the lowest pending channel and runs one load sequence on the
// shared bus: T_SETUP clocks with data and chip address driven, T_STROBE clocks
// with dly_en high (the decoder pulls that chip's latch enable low), T_HOLD
// clocks with data still driven. A channel written again while it is loading
// is loaded again afterwards, so the chip always ends with the last value.
//
// The 16 channels and the 10-bit setting follow the published design; the bus
// (10 data lines, 4 address lines, one strobe), the sequence and its lengths
// are this design's choice.
module delay_programmer
#(
  parameter int N_CH       = 16,
  parameter int DELAY_BITS = 10,
  parameter int T_SETUP    = 2,
  parameter int T_STROBE   = 2,
  parameter int T_HOLD     = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 set_valid,
  input  logic [$clog2(N_CH)-1:0]              set_idx,
  input  logic [DELAY_BITS-1:0]                set_val,
  output logic [N_CH-1:0][DELAY_BITS-1:0]      values,
  output logic                                 busy,
  output logic [N_CH-1:0]                      pending,
  output logic [DELAY_BITS-1:0]                dly_d,
  output logic [$clog2(N_CH)-1:0]              dly_addr,
  output logic                                 dly_en
);

  localparam int AW = $clog2(N_CH);
  localparam int TW = 8;

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_STROBE, S_HOLD} state_t;

  state_t          state;
  logic [TW-1:0]   timer;
  logic [AW-1:0]   next_idx;
  logic            any_pending;

  // Lowest pending channel.
  always_comb begin
    next_idx    = '0;
    any_pending = 1'b0;
    for (int i = N_CH - 1; i >= 0; i--)
      if (pending[i]) begin
        next_idx    = AW'(i);
        any_pending = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state    <= S_IDLE;
      timer    <= '0;
      values   <= '0;
      pending  <= '0;
      dly_d    <= '0;
      dly_addr <= '0;
      dly_en   <= 1'b0;
    end else begin
      case (state)
        S_IDLE:
          if (any_pending) begin
            pending[next_idx] <= 1'b0;
            dly_d    <= values[next_idx];
            dly_addr <= next_idx;
            timer    <= TW'(T_SETUP - 1);
            state    <= S_SETUP;
          end
        S_SETUP:
          if (timer == '0) begin
            dly_en <= 1'b1;
            timer  <= TW'(T_STROBE - 1);
            state  <= S_STROBE;
          end else timer <= timer - 1'b1;
        S_STROBE:
          if (timer == '0) begin
            dly_en <= 1'b0;
            timer  <= TW'(T_HOLD - 1);
            state  <= S_HOLD;
          end else timer <= timer - 1'b1;
        S_HOLD:
          if (timer == '0) state <= S_IDLE;
          else             timer <= timer - 1'b1;
        default: state <= S_IDLE;
      endcase
      // A new write wins over the clear of the channel being started.
      if (set_valid) begin
        values[set_idx]  <= set_val;
        pending[set_idx] <= 1'b1;
      end
    end

  assign busy = (state != S_IDLE);

endmodule
