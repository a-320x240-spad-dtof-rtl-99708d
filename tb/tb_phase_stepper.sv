// tb_phase_stepper: nominal code SEL0 + s*k, trim from the calibration
// table, and the PL/PR/SEL/SELN decoding are compared with an independent
// model for random settings. The quadrant table is written out literally:
// code[8:7] = 0,1,2,3 -> PL,PR = 11,01,00,10.
// It also drives the behavioural rotator (non-ideal law) through one period
// and checks that the interpolated phase never goes backwards, and that
// the steps are unequal (the reason for calibration).
module tb_phase_stepper;
  logic clk = 1'b0, rst_n = 1'b1, step_clr = 1'b0, step_adv = 1'b0, cal_we = 1'b0;
  logic [8:0] k = '0, sel0 = '0, nominal, code;
  logic [5:0] cal_addr = '0;
  logic signed [5:0] cal_data = '0;
  logic pl, pr;
  logic [6:0] sel, seln;
  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0, cyc = 0;
  int trim [64];

  phase_stepper dut (.clk, .rst_n, .step_clr, .step_adv, .k, .sel0, .cal_we, .cal_addr,
                     .cal_data, .nominal, .code, .pl, .pr, .sel, .seln);

  always #1250 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic expect_code(int nom);
    int c, q, p;
    logic [1:0] plpr;
    logic [6:0] s;
    c = (nom + trim[nom >> 3] + 512) % 512;
    q = c / 128; p = c % 128;
    case (q)
      0: begin plpr = 2'b11; s = 7'(p); end
      1: begin plpr = 2'b01; s = 7'(127 - p); end
      2: begin plpr = 2'b00; s = 7'(p); end
      default: begin plpr = 2'b10; s = 7'(127 - p); end
    endcase
    checks++;
    if (int'(nominal) != nom || int'(code) != c || {pl, pr} != plpr || sel != s || seln != ~s) begin
      failures++;
      $display("FAIL nom %0d: got nom %0d code %0d plpr %b sel %0d, exp code %0d plpr %b sel %0d",
               nom, nominal, code, {pl, pr}, sel, c, plpr, s);
    end
  endtask

  // Non-ideal rotator driven from the stepper, for the monotonicity check.
  logic ref_clk = 1'b0, rot_out;
  phase_rotator_model #(.T_PS(2500.0), .INS_PS(0.0), .IDEAL(1'b0)) u_rot (
    .clk_in (ref_clk), .pl, .pr, .sel, .seln, .clk_out (rot_out));

  initial begin
    int nom, nsteps;
    real prev, cur, dmin, dmax;
    for (int i = 0; i < 64; i++) trim[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1'b1;
    // calibration entries
    for (int i = 0; i < 12; i++) begin
      @(negedge clk);
      cal_we = 1'b1; cal_addr = 6'($urandom_range(0, 63)); cal_data = 6'($urandom);
      trim[cal_addr] = int'(cal_data);
    end
    @(negedge clk); cal_we = 1'b0;
    for (int t = 0; t < 6; t++) begin
      k = 9'($urandom_range(1, 64)); sel0 = 9'($urandom);
      @(negedge clk); step_clr = 1'b1; @(negedge clk); step_clr = 1'b0;
      nom = int'(sel0);
      expect_code(nom);
      nsteps = $urandom_range(3, 20);
      for (int s = 0; s < nsteps; s++) begin
        @(negedge clk); step_adv = 1'b1; @(negedge clk); step_adv = 1'b0;
        nom = (nom + int'(k)) % 512;
        expect_code(nom);
        @(negedge clk); expect_code(nom);    // holds without step_adv
      end
    end
    // Rotator law over one period, trims cleared, k = 8.
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); cal_we = 1'b1; cal_addr = 6'(i); cal_data = '0; trim[i] = 0;
    end
    @(negedge clk); cal_we = 1'b0; k = 9'd8; sel0 = '0;
    @(negedge clk); step_clr = 1'b1; @(negedge clk); step_clr = 1'b0;
    prev = -1.0; dmin = 1.0e9; dmax = 0.0;
    for (int s = 0; s < 64; s++) begin
      #10 ref_clk = 1'b1;
      @(posedge rot_out);
      cur = u_rot.d;
      #10 ref_clk = 1'b0;
      #2600;
      if (prev >= 0.0) begin
        checks++;
        if (cur < prev) begin failures++; $display("FAIL rotator phase goes back at step %0d", s); end
        if (cur - prev < dmin) dmin = cur - prev;
        if (cur - prev > dmax) dmax = cur - prev;
      end
      prev = cur;
      @(negedge clk); step_adv = 1'b1; @(negedge clk); step_adv = 1'b0;
    end
    checks++;
    if (dmax - dmin < 1.0) begin failures++; $display("FAIL rotator steps look uniform"); end
    $display("rotator model: 8-code steps between %0.1f and %0.1f ps", dmin, dmax);
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
