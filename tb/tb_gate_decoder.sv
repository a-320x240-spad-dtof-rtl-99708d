// tb_gate_decoder: every LFSR state must decode to its gate number.
// The sequence is produced by an independent bit-level model of
// x^6+x^5+1 from the seed 000001; the idle state 0 must decode to 0.
module tb_gate_decoder;
  logic [5:0] lfsr_state, gate;
  int checks = 0, failures = 0;

  gate_decoder dut (.lfsr_state, .gate);

  initial begin
    logic [5:0] m;
    m = 6'b000001;
    lfsr_state = 6'd0;
    #1 checks++;
    if (gate != 0) begin failures++; $display("FAIL idle -> %0d", gate); end
    for (int g = 1; g <= 63; g++) begin
      lfsr_state = m;
      #1 checks++;
      if (gate != 6'(g)) begin failures++; $display("FAIL state %b -> %0d exp %0d", m, gate, g); end
      m = {m[4:0], m[5] ^ m[4]};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
