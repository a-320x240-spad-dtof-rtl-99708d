// tb_readout_mux: the multiplexer must deliver words 0..N-1 in order under a
// random ready pattern, hold each until accepted, pulse done once after the
// last, and go idle.
module tb_readout_mux;
  import lidar_pkg::*;
  localparam int N = 37;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0, valid, ready = 1'b0, done;
  cluster_word_t words [N];
  cluster_word_t word;
  logic [$clog2(N+1)-1:0] index;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0, ndone = 0, nacc = 0;

  readout_mux #(.N(N)) dut (.clk, .rst_n, .start, .words, .valid, .ready, .word, .index, .done);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (valid && ready) begin
      checks++;
      if (word !== words[nacc] || int'(index) != nacc) begin
        failures++; $display("FAIL word %0d: got %h idx %0d", nacc, word, index);
      end
      nacc++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) words[i] = cluster_word_t'($urandom);
    repeat (2) @(negedge clk); rst_n = 1'b1;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    while (nacc < N && cyc < 2000) begin
      ready = ($urandom_range(0, 2) != 0);
      @(negedge clk);
    end
    ready = 1'b0;
    repeat (5) @(negedge clk);
    checks++; if (nacc != N)  begin failures++; $display("FAIL accepted %0d", nacc); end
    checks++; if (ndone != 1) begin failures++; $display("FAIL done pulses %0d", ndone); end
    checks++; if (valid)      begin failures++; $display("FAIL still valid"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
