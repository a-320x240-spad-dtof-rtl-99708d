// tb_gate_lfsr: checks the gate LFSR against an independent model.
// The model is a Fibonacci x^6+x^5+1 register written out bit by bit. The
// test checks idle state outside the window, seed on the first run edge,
// the full 63-state sequence (all distinct, period 63) and return to idle
// when run drops, plus the asynchronous reset.
module tb_gate_lfsr;
  logic gclk = 1'b0, rst = 1'b1, run = 1'b0;
  logic [5:0] state;
  int checks = 0, failures = 0;
  int cyc = 0;

  gate_lfsr dut (.gclk, .rst, .run, .state);

  always #5 gclk = ~gclk;
  always @(posedge gclk) cyc++;

  task automatic chk(logic [5:0] exp, string what);
    checks++;
    if (state !== exp) begin
      failures++;
      $display("FAIL %s: got %b exp %b", what, state, exp);
    end
  endtask

  initial begin
    logic [5:0] m;
    bit seen [64];
    repeat (2) @(negedge gclk);
    chk(6'd0, "reset");
    rst = 1'b0;
    @(negedge gclk); chk(6'd0, "idle");
    run = 1'b1;
    m = 6'b000001;
    for (int i = 0; i < 63; i++) seen[i] = 0;
    seen[63] = 0;
    for (int g = 1; g <= 63; g++) begin
      @(negedge gclk);
      chk(m, $sformatf("gate %0d", g));
      checks++;
      if (seen[state]) begin failures++; $display("FAIL repeated state %b", state); end
      seen[state] = 1;
      m = {m[4:0], m[5] ^ m[4]};
    end
    checks++;
    if (m != 6'b000001) begin failures++; $display("FAIL model period is not 63"); end
    @(negedge gclk); chk(6'b000001, "wraps to seed after 63");
    run = 1'b0;
    @(negedge gclk); chk(6'd0, "idle after window");
    run = 1'b1;
    @(negedge gclk); @(negedge gclk);
    #1 rst = 1'b1; #1 chk(6'd0, "async reset");
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
