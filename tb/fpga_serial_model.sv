// fpga_serial_model: behavioural model of an FPGA's slave-serial
// configuration port, for testbenches only.
//
// PROGRAM low clears it (INIT and DONE low, bit count zero). After PROGRAM
// rises, INIT goes high 100 ns later. While INIT is high, each rising CCLK edge
// takes DIN; the bits are kept in `bits` (first bit first). DONE rises once
// N_BITS bits have arrived.
module fpga_serial_model #(
  parameter int N_BITS = 64
) (
  input  logic prog_n,
  input  logic cclk,
  input  logic din,
  output logic init_n,
  output logic done
);

  bit bits [$];

  initial begin
    init_n = 1'b0;
    done   = 1'b0;
  end

  always @(negedge prog_n) begin
    init_n = 1'b0;
    done   = 1'b0;
    bits.delete();
  end

  always @(posedge prog_n) begin
    #100;
    if (prog_n) init_n = 1'b1;
  end

  always @(posedge cclk)
    if (init_n && prog_n && !done) begin
      bits.push_back(din);
      if (bits.size() == N_BITS) done = 1'b1;
    end

endmodule
