// input_mux: four 2:1 multiplexers in front of a LUT.
//
// In standard mode (sel_write = 0) the four trigger lines form the LUT address;
// in write mode (sel_write = 1) the 4-bit LUT address from the VME registers
// does. Purely combinational. The "4x 2:1" structure is the published one; the
// polarity of sel_write is this design's choice.
module input_mux (
  input  logic       sel_write,
  input  logic [3:0] trig,
  input  logic [3:0] vme_addr,
  output logic [3:0] y
);

  always_comb y = sel_write ? vme_addr : trig;

endmodule
