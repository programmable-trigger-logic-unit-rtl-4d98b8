// trigger_lut_logic: two-stage LUT network that turns 16 trigger inputs into
// one trigger decision.
//
// First stage: LUT k (k = 0..3) is addressed by trig_in[4k+3:4k] and so can
// hold any Boolean function of those four inputs. Second stage: LUT 4 is
// addressed by the four first-stage outputs (LUT k's output is address bit k)
// and combines them. Together the five LUTs hold 80 bits. The output of LUT 0
// also leaves as an additional trigger output. The decision path is
// combinational from trig_in to trig_lut (two asynchronous RAM reads and two
// multiplexers), the same for every stored function.
//
// Programming: with sel_write = 1 all five multiplexers pass lut_addr instead
// of the trigger lines; a one-cycle wr_strobe then writes wr_data at lut_addr
// into every LUT whose bit in wr_ram is set. In write mode ram_out shows the
// bit stored at lut_addr in each LUT, for read-back. The structure follows the
// published wiring diagram; the input-to-LUT numbering, the write gating by
// sel_write and the read-back are this design's choices.
module trigger_lut_logic
  import trilomo_pkg::*;
(
  input  logic                clk,
  input  logic [N_INPUTS-1:0] trig_in,
  input  logic                sel_write,
  input  logic [LUT_IN-1:0]   lut_addr,
  input  logic [N_LUTS-1:0]   wr_ram,
  input  logic                wr_data,
  input  logic                wr_strobe,
  output logic                trig_lut,
  output logic                trig_extra,
  output logic [N_LUTS-1:0]   ram_out
);

  logic [N_LUTS-1:0] we;
  logic [LUT_IN-1:0] stage2_in;
  logic [LUT_IN-1:0] addr [N_LUTS];

  always_comb we = wr_ram & {N_LUTS{wr_strobe & sel_write}};

  for (genvar k = 0; k < N_STAGE1; k++) begin : g_stage1
    input_mux u_mux (
      .sel_write (sel_write),
      .trig      (trig_in[LUT_IN*k +: LUT_IN]),
      .vme_addr  (lut_addr),
      .y         (addr[k])
    );
    lut_ram u_ram (
      .clk (clk),
      .we  (we[k]),
      .d   (wr_data),
      .a   (addr[k]),
      .o   (ram_out[k])
    );
  end

  always_comb stage2_in = ram_out[N_STAGE1-1:0];

  input_mux u_mux2 (
    .sel_write (sel_write),
    .trig      (stage2_in),
    .vme_addr  (lut_addr),
    .y         (addr[N_STAGE1])
  );
  lut_ram u_ram2 (
    .clk (clk),
    .we  (we[N_STAGE1]),
    .d   (wr_data),
    .a   (addr[N_STAGE1]),
    .o   (ram_out[N_STAGE1])
  );

  assign trig_lut   = ram_out[N_STAGE1];
  assign trig_extra = ram_out[0];

endmodule
