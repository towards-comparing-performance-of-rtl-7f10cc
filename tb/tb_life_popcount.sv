// tb_life_popcount -- exhaustive check of the 8-input population count.
// Every one of the 256 input patterns is applied and the count compared with a
// bit-by-bit tally made in the testbench.
module tb_life_popcount;
  logic [7:0] bits;
  logic [3:0] count;
  int checks = 0, failures = 0;

  life_popcount #(.N(8)) dut (.bits(bits), .count(count));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      int expect_n;
      expect_n = 0;
      bits = 8'(v);
      for (int b = 0; b < 8; b++) if (((v >> b) & 1) != 0) expect_n++;
      #1;
      checks++;
      if (int'(count) != expect_n) begin
        failures++;
        $display("FAIL bits=%b count=%0d expected %0d", bits, count, expect_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
