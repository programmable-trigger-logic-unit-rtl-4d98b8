// delay_decoder: selects which of the delay chips takes the value on the shared
// data bus.
//
// A 4-to-16 decoder with active-low outputs: while `en` is high, output
// len_n[addr] is low and all others are high. Combinational. The published
// design only names a decoder between the FPGA and the delay elements; the
// active-low outputs match the delay chip's latch enable (transparent while
// low, latched on the rising edge), which is this design's reading of the part.
module delay_decoder #(
  parameter int N_CH = 16
) (
  input  logic [$clog2(N_CH)-1:0] addr,
  input  logic                    en,
  output logic [N_CH-1:0]         len_n
);

  always_comb
    for (int i = 0; i < N_CH; i++)
      len_n[i] = !(en && (addr == ($clog2(N_CH))'(i)));

endmodule
