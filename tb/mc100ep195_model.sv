// mc100ep195_model: behavioural model of one programmable ECL delay chip, for
// testbenches only (an analog part, not synthesizable).
//
// The 10-bit setting `d` passes through a latch that is transparent while
// `len` is low and holds while it is high. The output repeats the input after
// setting x 10 ps (0 to 10.23 ns) plus T_FIXED_NS, as a transport delay, so
// pulses shorter than the delay survive. The part's fixed insertion delay is
// not modelled by default (T_FIXED_NS = 0).
module mc100ep195_model #(
  parameter real T_FIXED_NS = 0.0
) (
  input  logic       in,
  input  logic [9:0] d,
  input  logic       len,
  output logic       q
);

  logic [9:0] setting = '0;

  always_latch
    if (!len) setting = d;

  initial q = 1'b0;

  always @(in) begin
    automatic logic v  = in;
    automatic real  dt = T_FIXED_NS + real'(setting) * 0.01;
    if (dt <= 0.0) q = v;
    else
      fork
        begin
          #(dt);
          q = v;
        end
      join_none
  end

endmodule
