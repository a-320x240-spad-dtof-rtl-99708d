// tb_histogram_unit: random events against a reference array, for the three
// counter widths; saturation at 255/1023/4095 is forced by bursts into one
// bin; gate 0 must be ignored; clear must zero every bin; one event per clock.
module tb_histogram_unit;
  import lidar_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, clr = 1'b0, inc = 1'b0;
  cnt_width_e width = CW12;
  logic [5:0] inc_gate = '0, rd_bin = '0;
  logic [11:0] rd_count;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0;
  int unsigned ref_h [64];

  histogram_unit dut (.clk, .rst_n, .clr, .width, .inc, .inc_gate, .rd_bin, .rd_count);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic event_in(int g, int unsigned maxv);
    @(negedge clk); inc = 1'b1; inc_gate = 6'(g);
    if (g != 0 && ref_h[g] < maxv) ref_h[g]++;
    @(negedge clk); inc = 1'b0;
  endtask

  task automatic compare(string what);
    for (int g = 0; g <= 63; g++) begin
      rd_bin = 6'(g); #1;
      checks++;
      if (int'(rd_count) != ((g == 0) ? 0 : int'(ref_h[g]))) begin
        failures++;
        if (failures < 10) $display("FAIL %s bin %0d: got %0d exp %0d", what, g, rd_count, ref_h[g]);
      end
    end
  endtask

  task automatic clear_all();
    @(negedge clk); clr = 1'b1; @(negedge clk); clr = 1'b0;
    for (int g = 0; g < 64; g++) ref_h[g] = 0;
  endtask

  initial begin
    int unsigned maxv;
    for (int g = 0; g < 64; g++) ref_h[g] = 0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int w = 0; w < 3; w++) begin
      width = cnt_width_e'(w);
      maxv = (w == 0) ? 255 : (w == 1) ? 1023 : 4095;
      clear_all();
      for (int i = 0; i < 300; i++) event_in(int'($urandom_range(0, 63)), maxv);
      compare("random");
      // back-to-back events, one per clock, into one bin beyond saturation
      @(negedge clk); inc = 1'b1; inc_gate = 6'd17;
      for (int i = 0; i < int'(maxv) + 20; i++) begin
        if (ref_h[17] < maxv) ref_h[17]++;
        @(negedge clk);
      end
      inc = 1'b0;
      compare("saturation");
    end
    clear_all();
    compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
