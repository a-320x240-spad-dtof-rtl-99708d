// tb_control_logic: the sequencer against the expected event counts and
// latencies for random (steps, reps), in time-of-flight and counter mode.
// Readout and histogram dump are answered after random delays. Checks:
// laser pulses = steps*reps, each window exactly 63 clocks, laser to
// meas_done = 65 clocks, ro_start and rst_sys counts, step_adv = steps-1,
// hist_start = steps (none in counter mode), one frame_done, busy low after.
module tb_control_logic;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0, cnt_mode = 1'b0;
  logic [15:0] num_steps = 1, reps = 1, step_idx, rep_idx;
  logic ro_done = 1'b0, hist_done = 1'b0;
  logic rst_sys, laser, run, meas_done, ro_start, hist_start, step_clr, step_adv, frame_done, busy;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0;
  int n_laser, n_rst, n_md, n_ro, n_hist, n_adv, n_clr, n_fd, run_len, laser_cyc;

  control_logic dut (.clk, .rst_n, .start, .num_steps, .reps, .cnt_mode, .ro_done, .hist_done,
                     .rst_sys, .laser, .run, .meas_done, .ro_start, .hist_start, .step_clr,
                     .step_adv, .frame_done, .busy, .step_idx, .rep_idx);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (laser) begin n_laser++; laser_cyc = cyc; end
    if (rst_sys) n_rst++;
    if (meas_done) begin
      n_md++; checks++;
      if (cyc - laser_cyc != 65) begin failures++; $display("FAIL laser->meas_done %0d", cyc - laser_cyc); end
    end
    if (ro_start) begin
      n_ro++;
      fork begin repeat ($urandom_range(1, 20)) @(posedge clk); ro_done <= 1'b1; @(posedge clk); ro_done <= 1'b0; end join_none
    end
    if (hist_start) begin
      n_hist++;
      fork begin repeat ($urandom_range(1, 20)) @(posedge clk); hist_done <= 1'b1; @(posedge clk); hist_done <= 1'b0; end join_none
    end
    if (step_adv) n_adv++;
    if (step_clr) n_clr++;
    if (frame_done) n_fd++;
    if (run) run_len++;
    else if (run_len != 0) begin
      checks++;
      if (run_len != 63) begin failures++; $display("FAIL window %0d clocks", run_len); end
      run_len = 0;
    end
  end

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int s, r;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      s = $urandom_range(1, 4); r = $urandom_range(1, 4);
      cnt_mode = (t % 3 == 2);
      num_steps = 16'(s); reps = 16'(r);
      n_laser = 0; n_rst = 0; n_md = 0; n_ro = 0; n_hist = 0; n_adv = 0; n_clr = 0; n_fd = 0; run_len = 0;
      @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
      @(posedge frame_done);
      repeat (3) @(negedge clk);
      chk(n_laser, s * r, "laser pulses");
      chk(n_md, s * r, "meas_done");
      chk(n_ro, cnt_mode ? s : s * r, "readouts");
      chk(n_rst, cnt_mode ? s : s * r, "resets");
      chk(n_hist, cnt_mode ? 0 : s, "histogram dumps");
      chk(n_adv, s - 1, "phase steps");
      chk(n_clr, 1, "step_clr");
      chk(n_fd, 1, "frame_done");
      chk(int'(busy), 0, "busy after");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
