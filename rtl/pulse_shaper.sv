// pulse_shaper: gives the trigger output a programmable width.
//
// The leading edge is not clocked: a rising edge of `trig` (the LUT decision)
// sets the output flip-flop directly, so the output keeps the timing of the
// inputs. The trailing edge is clocked: while the output is high a counter
// advances on every `clk` edge, and when it has counted `width` periods it
// clears the flip-flop through its asynchronous reset, held for one period.
// The pulse therefore lasts more than `width` and at most `width`+1 clock
// periods; `width` is clamped to PW_MIN..PW_MAX. With the assumed 200 MHz clock
// the settings 1..6 give 5 ns to 30 ns. The pulse is not retriggerable, and an
// edge of `trig` during the one-period clear is lost.
//
// The 5 ns to 30 ns range is the published figure; the edge-set/clocked-clear
// structure and the 200 MHz clock are this design's choice. The output
// flip-flop is clocked by the trigger itself, by intent: that is what keeps the
// leading edge free of clock jitter. Its state is read in the `clk` domain
// through one flip-flop stage (the counter).
module pulse_shaper #(
  parameter int PW_W   = 3,
  parameter int PW_MIN = 1,
  parameter int PW_MAX = 6
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            trig,
  input  logic [PW_W-1:0] width,
  output logic            pulse
);

  logic            q;
  logic            clr;
  logic            clr_a;
  logic [PW_W-1:0] cnt;
  logic [PW_W-1:0] w_eff;

  always_comb begin
    if (width < PW_W'(PW_MIN))      w_eff = PW_W'(PW_MIN);
    else if (width > PW_W'(PW_MAX)) w_eff = PW_W'(PW_MAX);
    else                            w_eff = width;
  end

  always_comb clr_a = clr | ~rst_n;

  // Leading edge: set by the trigger, cleared by the width counter.
  always_ff @(posedge trig or posedge clr_a)
    if (clr_a) q <= 1'b0;
    else       q <= 1'b1;

  // Trailing edge: count clock periods while the output is high.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt <= '0;
      clr <= 1'b0;
    end else if (clr) begin
      cnt <= '0;
      clr <= 1'b0;
    end else if (q) begin
      if (cnt == w_eff) clr <= 1'b1;
      else              cnt <= cnt + 1'b1;
    end

  assign pulse = q;

endmodule
