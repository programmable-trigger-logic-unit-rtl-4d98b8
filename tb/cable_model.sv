// cable_model: transport delay of one signal cable, for testbenches only.
// The output repeats the input after `skew_10ps` x 10 ps.
module cable_model (
  input  logic       in,
  input  logic [9:0] skew_10ps,
  output logic       out
);

  initial out = 1'b0;

  always @(in) begin
    automatic logic v  = in;
    automatic real  dt = real'(skew_10ps) * 0.01;
    if (dt <= 0.0) out = v;
    else
      fork
        begin
          #(dt);
          out = v;
        end
      join_none
  end

endmodule
