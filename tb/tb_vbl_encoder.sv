// tb_vbl_encoder: exhaustive test of the 8x3 burst-order encoder.
//
// For every sector mask and every beat number the encoder must name the
// sector whose byte goes out on that beat: the beat-th open sector counted
// from sector 0, and report invalid once the beat is past the last open
// sector. The reference list of open sectors is built here independently.
module tb_vbl_encoder;
  logic [7:0] sb;
  logic [2:0] beat, idx;
  logic       valid;
  int checks = 0, failures = 0;

  vbl_encoder dut (.sb, .beat, .idx, .valid);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < 256; m++) begin
      int open_list[$];
      open_list = {};
      for (int s = 0; s < 8; s++) if ((m >> s) & 1) open_list.push_back(s);
      for (int b = 0; b < 8; b++) begin
        sb = 8'(m); beat = 3'(b);
        #1;
        checks++;
        if (b < open_list.size()) begin
          if (!valid || int'(idx) != open_list[b]) begin
            failures++;
            $display("sb=%02h beat=%0d: idx=%0d valid=%0b, expected %0d", sb, b, idx, valid, open_list[b]);
          end
        end else if (valid) begin
          failures++;
          $display("sb=%02h beat=%0d: valid past the burst", sb, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
