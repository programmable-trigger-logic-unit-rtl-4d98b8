// vme_master: bus-functional model of a VME master for testbenches.
//
// Task `cycle` runs one single transfer: it drives address, AM, LWORD, WRITE
// and write data, asserts AS 35 ns later and both DS 10 ns after that, waits
// for DTACK (up to `timeout_ns`), samples read data, releases DS and AS and
// waits for DTACK to go high again. `acked` tells whether the slave answered.
module vme_master (
  output logic        as_n,
  output logic [1:0]  ds_n,
  output logic        write_n,
  output logic        lword_n,
  output logic [5:0]  am,
  output logic [31:1] a,
  output logic [31:0] d,
  input  logic [31:0] d_slave,
  input  logic        d_oe,
  input  logic        dtack_n
);

  int timeout_ns = 2000;
  int cycles_done = 0;
  int oe_errors = 0;

  initial begin
    as_n = 1; ds_n = 2'b11; write_n = 1; lword_n = 1;
    am = '0; a = '0; d = '0;
  end

  task automatic cycle(input bit wr, input logic [31:0] addr, input logic [5:0] amc,
                       input logic [31:0] wdata, output logic [31:0] rdata, output bit acked);
    int t;
    a = addr[31:1]; am = amc; lword_n = 0; write_n = !wr; d = wdata;
    #35 as_n = 0;
    #10 ds_n = 2'b00;
    t = 0;
    while (dtack_n && t < timeout_ns) begin #1; t++; end
    acked = !dtack_n;
    #5;
    rdata = d_slave;
    if (acked && !wr && !d_oe) oe_errors++;
    if (acked && wr && d_oe) oe_errors++;
    ds_n = 2'b11;
    #5 as_n = 1;
    t = 0;
    while (!dtack_n && t < timeout_ns) begin #1; t++; end
    if (!dtack_n) acked = 0;
    lword_n = 1; write_n = 1;
    #20;
    cycles_done++;
  endtask

endmodule
