// delay_decoder_tb: exhaustive check of the 4-to-16 active-low decoder.
module delay_decoder_tb;
  logic [3:0] addr;
  logic en;
  logic [15:0] len_n;
  int checks = 0, failures = 0;

  delay_decoder dut (.addr, .en, .len_n);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int i = 0; i < 16; i++) begin
        en = e[0]; addr = 4'(i);
        #1;
        checks++;
        if (len_n !== (e[0] ? ~(16'd1 << i) : 16'hFFFF)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d len_n=%h", e, i, len_n);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
