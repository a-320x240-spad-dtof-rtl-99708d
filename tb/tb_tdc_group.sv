// tb_tdc_group: one LFSR group of 12x20 pixels with a real gated clock.
// After each window opens, random pixels fire at random times; the expected
// gate is worked out from the pulse time relative to the clock edges, and
// the stored LFSR state (decoded by an independent model) and the address
// bits of every cluster are checked, including pixel-to-cluster mapping.
module tb_tdc_group;
  import lidar_pkg::*;
  localparam int T = 2500, D = 300;       // clock period, gclk delay (ps)
  logic clk = 1'b0, gclk = 1'b0, rst = 1'b0, run = 1'b0, cnt_mode = 1'b0;
  logic [19:0] pix [12];
  cluster_word_t words [6][10];
  int checks = 0, failures = 0, cyc = 0;
  int exp_gate [6][10];
  logic [3:0] exp_addr [6][10];

  tdc_group dut (.gclk, .rst, .run, .cnt_mode, .pix_en (1'b1), .pix, .words);

  always #(T/2) clk = ~clk;
  always @(clk) gclk <= #(D) clk;
  always @(posedge clk) cyc++;

  function automatic int model_gate(logic [5:0] st);
    logic [5:0] m = 6'b000001;
    for (int g = 1; g <= 63; g++) begin
      if (m == st) return g;
      m = {m[4:0], m[5] ^ m[4]};
    end
    return 0;
  endfunction

  task automatic pulse(int r, int c, int t);
    fork begin #(t); pix[r][c] = 1'b1; #(150); pix[r][c] = 1'b0; end join_none
  endtask

  initial begin
    for (int r = 0; r < 12; r++) pix[r] = '0;
    repeat (3) @(posedge clk);
    for (int w = 0; w < 4; w++) begin
      rst = 1'b1; @(posedge clk); rst = 1'b0; @(posedge clk);
      run = 1'b1;       // at this edge c0: gate g spans [c0+D+(g-1)T, c0+D+gT)
      for (int r = 0; r < 6; r++)
        for (int c = 0; c < 10; c++) begin
          automatic int p = $urandom_range(0, 3);
          automatic int t = $urandom_range(D + 100, D + 60 * T);
          exp_addr[r][c] = '0; exp_gate[r][c] = 0;
          if ($urandom_range(0, 3) != 0) begin
            if (((t - D) % T) < 30 || ((t - D) % T) > T - 30) t += 100;
            pulse(2 * r + p / 2, 2 * c + p % 2, t);
            exp_addr[r][c] = 4'(1 << p);
            exp_gate[r][c] = (t - D) / T + 1;
          end
        end
      repeat (63) @(posedge clk);
      run = 1'b0;
      repeat (4) @(posedge clk);
      for (int r = 0; r < 6; r++)
        for (int c = 0; c < 10; c++) begin
          checks++;
          if (words[r][c].addr != exp_addr[r][c] || model_gate(words[r][c].data) != exp_gate[r][c]) begin
            failures++;
            $display("FAIL window %0d cluster %0d,%0d: addr %b gate %0d, exp %b %0d", w, r, c,
                     words[r][c].addr, model_gate(words[r][c].data), exp_addr[r][c], exp_gate[r][c]);
          end
        end
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
