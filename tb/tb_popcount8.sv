// tb_popcount8: exhaustive test of the 8-bit population count.
//
// Applies all 256 sector masks and compares the count with a reference
// sum of the bits. The burst length of a sectored access is this count, so
// every value 0..8 must come out right. No clock is needed; a watchdog
// still ends the run if the loop were ever to hang.
module tb_popcount8;
  logic [7:0] in;
  logic [3:0] count;
  int checks = 0, failures = 0;

  popcount8 dut (.in, .count);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      automatic int ref_n;
      in = 8'(v);
      #1;
      ref_n = 0;
      for (int b = 0; b < 8; b++) ref_n += (v >> b) & 1;
      checks++;
      if (int'(count) != ref_n) begin
        failures++;
        $display("popcount(%02h) = %0d, expected %0d", in, count, ref_n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
