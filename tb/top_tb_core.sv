// top_tb_core: end-to-end test of lidar_sensor_top, shared by the reduced-size
// and the full-size testbench.
//
// The core drives the sensor the way a system would: it programs the
// registers, lets the control logic run whole measurements, fires pixels
// at computed times after each laser pulse and decodes the 64 (or fewer)
// serial outputs. Phase rotators are the behavioural model in its ideal
// (linear) setting, so the delay of the gated clock for a phase code is
// known exactly: INS + code/512 * T.
//
// Scene: every cluster sees an object at its own time of flight (or, in the
// "wall" scene, all at the same one). Per repetition a hash of (measurement
// seed, repetition number, cluster) decides which of the four pixels fire;
// pixel p fires at tof + 700 ps * p, and some clusters get photons after the
// window. Pulses closer than 40 ps to a gate edge are left out so the
// expected gate is unambiguous. From this the core predicts, independently of
// the RTL, every cluster frame and every histogram count, and compares them
// with what the serial outputs carry.
//
// Measurements run: time of flight with three phase steps and a calibration
// trim; an 8-bit-counter run on a wall that saturates; a 2D run with one
// quadrant disabled; a cluster-counter run; a run where the histograms count
// a single cluster. Mechanisms exercised are counted and each must occur.
module top_tb_core #(
  parameter int unsigned QR   = 1,
  parameter int unsigned QC   = 1,
  parameter int unsigned CHQ  = 2,
  parameter bit          FULL = 1'b0,   // instantiate the top without parameters
  parameter int unsigned MAX_CYCLES = 2000000
) ();
  import lidar_pkg::*;

  localparam int unsigned QCR   = QR * 6;
  localparam int unsigned QCC   = QC * 10;
  localparam int unsigned CPC   = QCC / CHQ;
  localparam int unsigned NCH   = 4 * CHQ;
  localparam int unsigned NW    = QCR * CPC;
  localparam int unsigned PROWS = 4 * QCR;
  localparam int unsigned PCOLS = 4 * QCC;
  localparam int unsigned NCL   = 4 * QCR * QCC;
  localparam int          T     = 2500;    // ps
  localparam int          INS   = 40;      // ps

  logic clk = 1'b0, rst_n = 1'b1;
  logic reg_we = 1'b0;
  logic [7:0] reg_addr = '0;
  logic [15:0] reg_wdata = '0, reg_rdata;
  logic [1:0] gclk;
  logic pr_pl, pr_pr;
  logic [6:0] pr_sel, pr_seln;
  logic [8:0] pr_code;
  logic laser, meas_done, readout_done, frame_done, busy;
  logic [PCOLS-1:0] pix [PROWS];
  logic [NCH-1:0] sout;

  initial #1 rst_n = 1'b0;   // an edge, so asynchronous resets act
  int checks = 0, failures = 0;
  longint cycles = 0;

  always #(T/2) clk = ~clk;
  always @(posedge clk) cycles <= cycles + 1;

  // ---------------- device under test ----------------
  if (FULL) begin : g_full
    lidar_sensor_top dut (
      .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .gclk,
      .pr_pl, .pr_pr, .pr_sel, .pr_seln, .pr_code, .laser, .pix,
      .meas_done, .readout_done, .frame_done, .busy, .sout);
  end else begin : g_small
    lidar_sensor_top #(.QROWS(QR), .QCOLS(QC), .CH_PER_Q(CHQ)) dut (
      .clk, .rst_n, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .gclk,
      .pr_pl, .pr_pr, .pr_sel, .pr_seln, .pr_code, .laser, .pix,
      .meas_done, .readout_done, .frame_done, .busy, .sout);
  end

  for (genvar i = 0; i < 2; i++) begin : g_rot
    phase_rotator_model #(.T_PS(real'(T)), .INS_PS(real'(INS)), .IDEAL(1'b1)) u_rot (
      .clk_in (clk), .pl (pr_pl), .pr (pr_pr), .sel (pr_sel), .seln (pr_seln),
      .clk_out (gclk[i]));
  end

  // ---------------- measurement settings (tb copy) ----------------
  int  m_seed, m_steps, m_reps, m_k, m_sel0, m_width, m_tgt;
  bit  m_cnt, m_2d, m_all, m_wall;
  logic [3:0] m_qen;
  int  trim [64];

  // Mechanism counters.
  int n_tof_words, n_late, n_multi, n_shift, n_dump, n_sat, n_2d, n_cnt,
      n_qoff, n_trim, n_target, n_step;

  function automatic int unsigned hsh(int unsigned a, int unsigned b, int unsigned c);
    int unsigned x;
    x = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h165667B1) * 32'hC2B2AE3D;
    x = x ^ (x >> 15); x = x * 32'h2C1B3C6D; x = x ^ (x >> 12);
    return x;
  endfunction

  function automatic int code_of_step(int s);
    int nom;
    nom = (m_sel0 + s * m_k) % 512;
    return (nom + trim[nom >> 3] + 512) % 512;
  endfunction

  function automatic int delay_of_step(int s);
    return INS + (code_of_step(s) * T) / 512;   // exact: T/512 not integer, see gate_of
  endfunction

  // Gate seen by a pulse t ps after the laser edge, for phase step s.
  // The clock delay is INS + code*T/512 ps (rounded by the simulator to 1 ps).
  function automatic int gate_of(int t, int s, output bit near);
    real d, x;
    int g;
    d = real'(INS) + real'(code_of_step(s)) * real'(T) / 512.0;
    x = (real'(t) - d) / real'(T);
    near = 1'b0;
    if (x < 0.0) begin
      near = (real'(t) - d) > -40.0;
      return 0;
    end
    g = int'($floor(x)) + 1;
    near = ((x - $floor(x)) * T < 40.0) || ((x - $floor(x)) * T > T - 40);
    return (g > 63) ? 0 : g;
  endfunction

  function automatic int tof_of(int cid);
    if (m_wall) return 60000 + (m_seed % 997);
    return 3000 + int'(hsh(m_seed, 7, cid) % 150000);
  endfunction

  // Pixels that fire in repetition n for cluster cid, with their times.
  function automatic logic [3:0] mask_of(int n, int cid, int q, output int tp [4]);
    int unsigned x;
    logic [3:0] m;
    bit late, near;
    int s, dummy;
    x = hsh(m_seed, n + 1000, cid);
    s = n / m_reps;
    m = m_wall ? 4'b0001 : 4'((x >> 8) & 4'hF);
    if (!m_wall && (x % 100) >= 70) m = '0;
    late = !m_wall && (((x >> 16) % 12) == 0);
    for (int p = 0; p < 4; p++) begin
      tp[p] = late ? (163000 + 700 * p) : (tof_of(cid) + 700 * p);
      dummy = gate_of(tp[p], s, near);
      if (near) m[p] = 1'b0;
    end
    if (!m_qen[q]) m = '0;
    return m;
  endfunction

  function automatic int last_pixel(logic [3:0] m);
    int l = -1;
    for (int p = 0; p < 4; p++) if (m[p]) l = p;
    return l;
  endfunction

  // ---------------- pixel stimulus ----------------
  int laser_n;

  task automatic pulse(int r, int c, int t);
    fork
      begin
        #(t);
        pix[r][c] = 1'b1;
        #(200);
        pix[r][c] = 1'b0;
      end
    join_none
  endtask

  task automatic check_code_at_laser(int n);
    int s;
    s = n / m_reps;
    checks++;
    if (int'(pr_code) != code_of_step(s)) begin
      failures++;
      $display("FAIL phase code step %0d: got %0d exp %0d", s, pr_code, code_of_step(s));
    end
    if (int'(pr_code) != (m_sel0 + s * m_k) % 512) n_trim++;
  endtask

  always @(posedge laser) begin
    automatic int n = laser_n;
    laser_n++;
    check_code_at_laser(n);
    for (int q = 0; q < 4; q++)
      for (int r = 0; r < QCR; r++)
        for (int c = 0; c < QCC; c++) begin
          automatic int cid = (q * QCR + r) * QCC + c;
          automatic int tp [4];
          automatic logic [3:0] m = mask_of(n, cid, q, tp);
          for (int p = 0; p < 4; p++)
            if (m[p]) pulse((q / 2) * 2 * QCR + 2 * r + p / 2, (q % 2) * 2 * QCC + 2 * c + p % 2, tp[p]);
        end
  end

  // ---------------- serial receivers ----------------
  int unsigned rxq [NCH][$];
  int  rx_bits [NCH];
  logic [13:0] rx_sh [NCH];

  always @(negedge clk) begin
    for (int ch = 0; ch < NCH; ch++) begin
      if (rx_bits[ch] == 0) begin
        if (sout[ch]) begin rx_bits[ch] = 1; rx_sh[ch] = 14'd1; end
      end else begin
        rx_sh[ch] = {rx_sh[ch][12:0], sout[ch]};
        rx_bits[ch]++;
        if (rx_bits[ch] == 14) begin
          rxq[ch].push_back(int'(rx_sh[ch][12:0]));
          rx_bits[ch] = 0;
        end
      end
    end
  end

  // ---------------- register access ----------------
  task automatic wr(int a, int d);
    @(negedge clk);
    reg_we = 1'b1; reg_addr = 8'(a); reg_wdata = 16'(d);
    @(negedge clk);
    reg_we = 1'b0;
  endtask

  task automatic rd(int a, output int d);
    @(negedge clk);
    reg_addr = 8'(a);
    #1;
    d = int'(reg_rdata);
  endtask

  // ---------------- one measurement ----------------
  task automatic measure(int seed, int steps, int reps, int k, int sel0, int width,
                         bit cnt, bit img2d, bit all, int tgt, logic [3:0] qen, bit wall);
    int ctrl, v;
    m_seed = seed; m_steps = steps; m_reps = reps; m_k = k; m_sel0 = sel0;
    m_width = width; m_cnt = cnt; m_2d = img2d; m_all = all; m_tgt = tgt;
    m_qen = qen; m_wall = wall;
    laser_n = 0;
    for (int ch = 0; ch < NCH; ch++) rxq[ch].delete();
    wr(8'h01, steps); wr(8'h02, reps); wr(8'h03, k); wr(8'h04, sel0);
    wr(8'h05, width); wr(8'h06, tgt); wr(8'h07, int'(qen));
    rd(8'h02, v);
    checks++; if (v != reps) begin failures++; $display("FAIL reg readback"); end
    ctrl = 1 | (int'(cnt) << 1) | (int'(img2d) << 2) | (int'(all) << 3);
    wr(8'h00, ctrl);
    @(posedge frame_done);
    repeat (40) @(posedge clk);
    check_streams();
  endtask

  // Predicted frames compared with the received ones.
  task automatic check_streams();
    int unsigned maxc;
    maxc = (m_width == 0) ? 255 : (m_width == 1) ? 1023 : 4095;
    for (int ch = 0; ch < NCH; ch++) begin
      automatic int q = ch / CHQ, j = ch % CHQ;
      automatic int unsigned hist [64];
      automatic int cnt_acc [NW];
      automatic logic [3:0] or_acc [NW];
      automatic int first_gate [NW];
      automatic int pos = 0;
      automatic int expected_frames;
      expected_frames = m_cnt ? m_steps * NW : m_steps * (m_reps * NW + 63);
      checks++;
      if (rxq[ch].size() != expected_frames) begin
        failures++;
        $display("FAIL ch %0d: %0d frames, expected %0d", ch, rxq[ch].size(), expected_frames);
        continue;
      end
      for (int s = 0; s < m_steps; s++) begin
        for (int g = 0; g < 64; g++) hist[g] = 0;
        for (int i = 0; i < NW; i++) begin cnt_acc[i] = 0; or_acc[i] = '0; end
        for (int rp = 0; rp < m_reps; rp++) begin
          automatic int n = s * m_reps + rp;
          for (int i = 0; i < NW; i++) begin
            automatic int r = i / CPC, c = j * CPC + i % CPC;
            automatic int cid = (q * QCR + r) * QCC + c;
            automatic int tp [4];
            automatic logic [3:0] m = mask_of(n, cid, q, tp);
            automatic bit near;
            automatic int g = 0;
            automatic int exp_pl, got;
            if (m != 0) g = gate_of(tp[last_pixel(m)], s, near);
            cnt_acc[i] = (cnt_acc[i] + $countones(m)) % 64;
            or_acc[i] |= m;
            if (!m_cnt) begin
              if (m_2d) exp_pl = int'(m);
              else      exp_pl = (g << 4) | int'(m);
              got = int'(rxq[ch][pos]); pos++;
              checks++;
              if (got != exp_pl) begin
                failures++;
                if (failures < 20) $display("FAIL ch %0d step %0d rep %0d word %0d: got %h exp %h (t=%0d m=%b code=%0d)",
                                            ch, s, rp, i, got, exp_pl, tp[last_pixel(m)], m, code_of_step(s));
              end
              if (!m_2d && m != 0) begin
                n_tof_words++;
                if (g == 0) n_late++;
                if ($countones(m) > 1) n_multi++;
                if (g != 0 && (m_all || i == m_tgt)) begin
                  if (hist[g] < maxc) hist[g]++;
                  if (!m_all) n_target++;
                end
                if (rp == 0 && m_wall == 0 && g != 0) begin
                  if (s == 0) first_gate[i] = g;
                  else if (first_gate[i] == g + 1 && last_pixel(m) == 0) n_shift++;
                end
              end else if (s == 0 && rp == 0) first_gate[i] = -1;
              if (m_2d && m != 0) n_2d++;
              if (!m_qen[q]) n_qoff++;
            end
          end
        end
        if (m_cnt) begin
          for (int i = 0; i < NW; i++) begin
            automatic int got = int'(rxq[ch][pos]);
            automatic int exp_pl = (cnt_acc[i] << 4) | int'(or_acc[i]);
            pos++;
            checks++;
            if (got != exp_pl) begin
              failures++;
              if (failures < 20) $display("FAIL cnt ch %0d word %0d: got %h exp %h", ch, i, got, exp_pl);
            end
            if (cnt_acc[i] > 1) n_cnt++;
          end
        end else begin
          for (int g = 1; g <= 63; g++) begin
            automatic int got = int'(rxq[ch][pos]);
            pos++;
            checks++;
            if (got != ((1 << 12) | int'(hist[g]))) begin
              failures++;
              if (failures < 20) $display("FAIL hist ch %0d step %0d bin %0d: got %h exp %0d", ch, s, g, got, hist[g]);
            end
            if (hist[g] == maxc) n_sat++;
          end
          n_dump++;
        end
      end
    end
    n_step += m_steps - 1;
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %-28s %0d", what, n);
  endtask

  initial begin
    for (int i = 0; i < 64; i++) trim[i] = 0;
    for (int r = 0; r < PROWS; r++) pix[r] = '0;
    for (int ch = 0; ch < NCH; ch++) rx_bits[ch] = 0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // Calibration: trims on the positions of steps 1 and 2 (nominal 64, 128).
    wr(8'h08, (8 << 8) | 5);        trim[8] = 5;
    wr(8'h08, (16 << 8) | 6'h3D);   trim[16] = -3;

    if (FULL) begin
      // One complete operation at full size: two phase steps, one repetition.
      measure(11, 2, 1, 64, 0, 2, 1'b0, 1'b0, 1'b1, 0, 4'hF, 1'b0);
      need("time-of-flight words", n_tof_words);
      need("photon outside window", n_late);
      need("phase step", n_step);
      need("histogram dump", n_dump);
    end else begin
      // 1. Time of flight, three phase steps of k=64, 12-bit counters.
      measure(11, 3, 2, 64, 0, 2, 1'b0, 1'b0, 1'b1, 0, 4'hF, 1'b0);
      // 2. Wall, 8-bit counters, enough events for one bin to saturate.
      measure(23, 1, 256 / NW + 2, 16, 100, 0, 1'b0, 1'b0, 1'b1, 0, 4'hF, 1'b1);
      // 3. 2D imaging with quadrant 3 disabled.
      measure(37, 1, 1, 16, 0, 2, 1'b0, 1'b1, 1'b1, 0, 4'b0111, 1'b0);
      // 4. Cluster TSPCs as counters over three repetitions.
      measure(41, 1, 3, 16, 0, 2, 1'b1, 1'b0, 1'b1, 0, 4'hF, 1'b0);
      // 5. Histograms restricted to one cluster per channel, 10-bit counters.
      measure(53, 2, 2, 32, 200, 1, 1'b0, 1'b0, 1'b0, NW / 2, 4'hF, 1'b0);

      need("time-of-flight words", n_tof_words);
      need("photon outside window", n_late);
      need("several pixels in a cluster", n_multi);
      need("phase step", n_step);
      need("gate shift by phase step", n_shift);
      need("calibration trim applied", n_trim);
      need("histogram dump", n_dump);
      need("counter saturation", n_sat);
      need("2D address-only words", n_2d);
      need("quadrant disabled", n_qoff);
      need("cluster counter mode", n_cnt);
      need("single-cluster histogram", n_target);
    end
    $display("cycles %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles >= MAX_CYCLES);
    failures++;
    $display("FAIL watchdog after %0d cycles", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
