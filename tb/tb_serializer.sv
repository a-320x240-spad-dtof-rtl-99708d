// tb_serializer: random words through the serializer, decoded by an
// independent receiver. Checks frame content, 14 bits per frame, idle low,
// back-to-back rate of 15 clocks per word, and that a valid word is held.
module tb_serializer;
  import lidar_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, in_valid = 1'b0, in_ready, sout, busy;
  frame_kind_e in_kind = FR_CLUSTER;
  logic [11:0] in_payload = '0;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0;
  int unsigned sent [$];
  int unsigned got [$];
  int first_acc = -1, last_acc = -1;

  serializer dut (.clk, .rst_n, .in_valid, .in_ready, .in_kind, .in_payload, .sout, .busy);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // receiver
  int nb = 0;
  logic [13:0] sh;
  always @(negedge clk) begin
    if (nb == 0) begin
      if (sout) begin nb = 1; sh = 14'd1; end
    end else begin
      sh = {sh[12:0], sout}; nb++;
      if (nb == 14) begin got.push_back(int'(sh[12:0])); nb = 0; end
    end
  end

  localparam int NWORDS = 40;

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    @(negedge clk);
    checks++; if (sout !== 1'b0) begin failures++; $display("FAIL idle not low"); end
    for (int i = 0; i < NWORDS; i++) begin
      in_valid = 1'b1;
      in_kind = frame_kind_e'($urandom_range(0, 1));
      in_payload = 12'($urandom);
      sent.push_back({in_kind, in_payload});
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (first_acc < 0) first_acc = cyc;
      last_acc = cyc;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (30) @(negedge clk);
    checks++;
    if (got.size() != NWORDS) begin failures++; $display("FAIL %0d frames", got.size()); end
    for (int i = 0; i < NWORDS && i < got.size(); i++) begin
      checks++;
      if (got[i] != sent[i]) begin failures++; $display("FAIL frame %0d: %h exp %h", i, got[i], sent[i]); end
    end
    checks++;
    if (last_acc - first_acc != 15 * (NWORDS - 1)) begin
      failures++; $display("FAIL rate: %0d clocks for %0d words", last_acc - first_acc, NWORDS - 1);
    end
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
