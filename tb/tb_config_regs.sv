// tb_config_regs: reset values, write/read-back of every register, the
// self-clearing start pulse, the calibration write pulse and the read-only
// status registers.
module tb_config_regs;
  import lidar_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1, we = 1'b0, busy = 1'b0;
  logic [7:0] addr = '0;
  logic [15:0] wdata = '0, rdata, step_idx = 16'h1234, rep_idx = 16'h0042;
  logic [8:0] phase_nom = 9'h155;
  logic start, cnt_mode, img2d, hist_all, cal_we;
  logic [15:0] num_steps, reps, hist_target;
  logic [8:0] phase_k, sel0;
  cnt_width_e cnt_width;
  logic [3:0] quad_en;
  logic [5:0] cal_addr;
  logic signed [5:0] cal_data;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0, n_start = 0, n_cal = 0;

  config_regs dut (.clk, .rst_n, .we, .addr, .wdata, .rdata, .busy, .step_idx, .rep_idx, .phase_nom,
                   .start, .cnt_mode, .img2d, .hist_all, .num_steps, .reps, .phase_k, .sel0,
                   .cnt_width, .hist_target, .quad_en, .cal_we, .cal_addr, .cal_data);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (start) n_start++;
    if (cal_we) n_cal++;
  end

  task automatic wr(int a, int d);
    @(negedge clk); we = 1'b1; addr = 8'(a); wdata = 16'(d); @(negedge clk); we = 1'b0;
  endtask
  task automatic rchk(int a, int exp, string what);
    addr = 8'(a); #1;
    checks++;
    if (int'(rdata) != exp) begin failures++; $display("FAIL %s: %h exp %h", what, rdata, exp); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1'b1;
    rchk(1, 1, "reset steps"); rchk(2, 1, "reset reps"); rchk(3, 16, "reset k");
    rchk(5, 2, "reset width"); rchk(7, 15, "reset quad_en");
    wr(1, 16'h0123); rchk(1, 16'h0123, "steps");
    wr(2, 16'h0456); rchk(2, 16'h0456, "reps");
    wr(3, 16'hFFFF); rchk(3, 16'h01FF, "k (9 bits)");
    wr(4, 16'h00AB); rchk(4, 16'h00AB, "sel0");
    wr(5, 0);        rchk(5, 0, "width 8");
    wr(5, 3);        rchk(5, 2, "width 3 -> 12");
    wr(6, 77);       rchk(6, 77, "target");
    wr(7, 16'h0005); rchk(7, 5, "quad_en");
    wr(0, 16'h000E); rchk(0, 16'h000E, "ctrl modes");
    checks++; if (n_start != 0) begin failures++; $display("FAIL start without bit0"); end
    wr(0, 16'h0001);
    @(negedge clk);
    checks++; if (n_start != 1) begin failures++; $display("FAIL start pulses %0d", n_start); end
    rchk(0, 0, "start reads 0, modes cleared");
    wr(8, (9 << 8) | 16'h003B);
    @(negedge clk);
    checks++;
    if (n_cal != 1 || cal_addr != 6'd9 || cal_data != -6'sd5) begin failures++; $display("FAIL cal write"); end
    busy = 1'b1;
    rchk(9, 1, "busy"); rchk(10, 16'h1234, "step idx"); rchk(11, 16'h0042, "rep idx"); rchk(12, 16'h0155, "nominal");
    checks++;
    if (num_steps != 16'h0123 || reps != 16'h0456 || phase_k != 9'h1FF || sel0 != 9'hAB ||
        cnt_width != CW12 || hist_target != 77 || quad_en != 4'h5) begin
      failures++; $display("FAIL outputs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc > 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
