// tb_lidar_pkg: the package's LFSR functions. lfsr_next must have period
// 63 from the seed and never reach 0; lfsr_to_gate must invert the
// sequence; cnt_max gives 255/1023/4095. The references are written out
// independently (bit-level feedback, literal constants).
module tb_lidar_pkg;
  import lidar_pkg::*;
  int checks = 0, failures = 0;
  initial begin
    logic [5:0] s, m;
    s = LFSR_SEED; m = 6'b000001;
    for (int g = 1; g <= 63; g++) begin
      checks++;
      if (s != m || lfsr_to_gate(s) != 6'(g) || s == 0) begin
        failures++; $display("FAIL gate %0d: state %b model %b", g, s, m);
      end
      s = lfsr_next(s); m = {m[4:0], m[5] ^ m[4]};
    end
    checks++; if (s != LFSR_SEED) begin failures++; $display("FAIL period"); end
    checks++; if (lfsr_to_gate(6'd0) != 0) begin failures++; $display("FAIL idle"); end
    checks++; if (cnt_max(CW8) != 255 || cnt_max(CW10) != 1023 || cnt_max(CW12) != 4095) begin
      failures++; $display("FAIL cnt_max");
    end
    checks++; if (NUM_GATES != 63 || WORD_W != 10 || PHASE_W != 9) begin failures++; $display("FAIL constants"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
