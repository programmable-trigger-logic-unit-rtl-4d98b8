// lut_ram_tb: checks the 16x1 look-up-table RAM.
// Reads the power-up content (all zero), writes a random pattern bit by bit,
// checks every address reads back without a clock edge (asynchronous read),
// and checks that a clock edge with `we` low changes nothing.
module lut_ram_tb;
  logic clk = 0, we = 0, d = 0;
  logic [3:0] a = 0;
  logic o;
  int checks = 0, failures = 0;
  logic [15:0] model, pat;

  lut_ram dut (.clk, .we, .d, .a, .o);

  always #5 clk = ~clk;

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    for (int i = 0; i < 16; i++) begin
      a = 4'(i); #1;
      check(o, 1'b0, "power-up content");
    end
    for (int r = 0; r < 4; r++) begin
      pat = 16'($urandom);
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        a = 4'(i); d = pat[i]; we = 1;
        @(negedge clk);
        we = 0;
        model[i] = pat[i];
      end
      for (int i = 0; i < 16; i++) begin
        a = 4'(i); #1;
        check(o, model[i], $sformatf("read-back round %0d addr %0d", r, i));
      end
      // clock edges with we low must not write
      for (int i = 0; i < 16; i++) begin
        @(negedge clk);
        a = 4'(i); d = ~model[i]; we = 0;
        @(negedge clk);
        check(o, model[i], "no write while we low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
