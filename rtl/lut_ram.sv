// lut_ram: one look-up table of the trigger logic, a 16x1 RAM.
//
// Four address lines pick one of 16 stored bits, which appears on `o` without a
// clock (asynchronous read), so the propagation time does not depend on the
// stored function. On a rising edge of `clk` with `we` high the bit `d` is
// written at address `a`; read and write share the one address, as in the
// FPGA's distributed RAM. The published design fixes the 16x1 size, the
// asynchronous read and the clocked write; the power-up content INIT (all zero)
// is this design's choice. The RAM has no reset, like the FPGA's distributed
// RAM: its content is set once by the declaration's initial value (loaded with
// the FPGA configuration) and afterwards only by writes, which linters report
// as an initialised variable that is also assigned in a process.
module lut_ram #(
  parameter logic [15:0] INIT = 16'h0000
) (
  input  logic       clk,
  input  logic       we,
  input  logic       d,
  input  logic [3:0] a,
  output logic       o
);

  logic [15:0] mem = INIT;  // FPGA power-up content

  always_ff @(posedge clk)
    if (we) mem[a] <= d;

  assign o = mem[a];

endmodule
