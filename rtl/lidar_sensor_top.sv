// lidar_sensor_top: the 320x240-pixel SPAD flash-LiDAR sensor.
//
// Four independent 160x120-pixel quadrants each hold 80 groups of 12x20
// pixels; a group shares one 6-bit LFSR and every 2x2-pixel cluster of it
// time-stamps photons by sampling that LFSR (6 bits) and records which of its
// pixels fired (4 bits). The LFSRs are clocked by the phase-rotated global
// clocks gclk[1:0]: gclk[0] (upper rotator) serves quadrants 0 and 1, gclk[1]
// (lower rotator) quadrants 2 and 3. The rotators themselves are analog and
// sit outside this module; phase_stepper drives their switch controls
// pr_pl, pr_pr, pr_sel, pr_seln, shared by both rotators.
//
// control_logic runs a measurement: for each phase step, reps repetitions of
// reset, laser pulse, 63-gate window, readout; after each step a histogram
// dump and a phase increment of k. Each of the 64 channels (16 per quadrant,
// each owning CPC cluster columns of its quadrant) reads its clusters
// through a multiplexer, decodes the LFSR state to a gate number, feeds its
// 63-bin histogram and sends frames on sout[ch].
//
// Pixel indexing: pix[row][col], rows 0..239, columns 0..319. Quadrant 0 is
// rows 0..119 / columns 0..159, quadrant 1 rows 0..119 / columns 160..319,
// quadrant 2 rows 120..239 / columns 0..159, quadrant 3 the rest. Channel
// q*CH_PER_Q + j reads cluster columns [j*CPC, j*CPC+CPC-1] of quadrant q,
// all rows, row-major.
//
// Timing: everything but the LFSRs and clusters runs on clk, the reference
// clock (2.5 ns period in the sensor; the serial frames are sent one bit
// per clk here, where the chip uses a 1.2 Gb/s bit clock). gclk must be clk
// delayed by a positive amount below one period.
//
// From the paper: array organisation, cluster and LFSR sharing, 63 gates,
// phase stepping by k, 64 channels, 63-bin 8/10/12-bit histograms, the
// control sequence. This design's choices: channel-to-cluster assignment,
// register bus, frame format and the single clock for control and readout.
module lidar_sensor_top
  import lidar_pkg::*;
#(
  parameter int unsigned QROWS    = 10,   // TDC groups per quadrant, vertically
  parameter int unsigned QCOLS    = 8,    // TDC groups per quadrant, horizontally
  parameter int unsigned CH_PER_Q = 16,
  localparam int unsigned CROWS   = 6,
  localparam int unsigned CCOLS   = 10,
  localparam int unsigned QCR     = QROWS * CROWS,       // cluster rows / quadrant
  localparam int unsigned QCC     = QCOLS * CCOLS,       // cluster cols / quadrant
  localparam int unsigned CPC     = QCC / CH_PER_Q,      // cluster cols / channel
  localparam int unsigned NCH     = 4 * CH_PER_Q,
  localparam int unsigned NW      = QCR * CPC,           // words / channel
  localparam int unsigned PROWS   = 2 * 2 * QCR,
  localparam int unsigned PCOLS   = 2 * 2 * QCC
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // register bus
  input  logic                          reg_we,
  input  logic [7:0]                    reg_addr,
  input  logic [15:0]                   reg_wdata,
  output logic [15:0]                   reg_rdata,
  // phase rotators
  input  logic [1:0]                    gclk,
  output logic                          pr_pl,
  output logic                          pr_pr,
  output logic [SEL_W-1:0]              pr_sel,
  output logic [SEL_W-1:0]              pr_seln,
  output logic [PHASE_W-1:0]            pr_code,
  // optics
  output logic                          laser,
  input  logic [PCOLS-1:0]               pix [PROWS],
  // status
  output logic                          meas_done,
  output logic                          readout_done,
  output logic                          frame_done,
  output logic                          busy,
  // serial outputs
  output logic [NCH-1:0]                sout
);

  // ---------------- registers ----------------
  logic        start, cnt_mode, img2d, hist_all;
  logic [15:0] num_steps, reps, hist_target;
  logic [PHASE_W-1:0] phase_k, sel0, nominal;
  cnt_width_e  cnt_width;
  logic [3:0]  quad_en;
  logic        cal_we;
  logic [5:0]  cal_addr;
  logic signed [5:0] cal_data;
  logic rst_sys, run, ro_start, hist_start, step_clr, step_adv;
  logic ro_done_all, hist_done_all;
  logic [15:0] step_idx, rep_idx;

  config_regs u_regs (
    .clk, .rst_n,
    .we (reg_we), .addr (reg_addr), .wdata (reg_wdata), .rdata (reg_rdata),
    .busy, .step_idx, .rep_idx, .phase_nom (nominal), .start, .cnt_mode, .img2d, .hist_all, .num_steps, .reps,
    .phase_k, .sel0, .cnt_width, .hist_target, .quad_en,
    .cal_we, .cal_addr, .cal_data
  );

  // ---------------- control ----------------

  control_logic u_ctrl (
    .clk, .rst_n, .start, .num_steps, .reps, .cnt_mode,
    .ro_done (ro_done_all), .hist_done (hist_done_all),
    .rst_sys, .laser, .run, .meas_done, .ro_start, .hist_start,
    .step_clr, .step_adv, .frame_done, .busy, .step_idx, .rep_idx
  );

  phase_stepper u_phase (
    .clk, .rst_n, .step_clr, .step_adv, .k (phase_k), .sel0,
    .cal_we, .cal_addr, .cal_data,
    .nominal, .code (pr_code), .pl (pr_pl), .pr (pr_pr), .sel (pr_sel), .seln (pr_seln)
  );

  // ---------------- pixel array ----------------
  logic arr_rst;
  assign arr_rst = rst_sys | ~rst_n;

  cluster_word_t qwords [4][QCR][QCC];

  for (genvar q = 0; q < 4; q++) begin : g_quad
    logic [2*QCC-1:0] qpix [2*QCR];
    for (genvar r = 0; r < 2*QCR; r++) begin : g_pr
      assign qpix[r] = pix[(q/2)*2*QCR + r][(q%2)*2*QCC +: 2*QCC];
    end
    pixel_quadrant #(.GROWS(QROWS), .GCOLS(QCOLS), .CROWS(CROWS), .CCOLS(CCOLS)) u_q (
      .gclk     (gclk[q/2]),
      .rst      (arr_rst),
      .run      (run),
      .cnt_mode (cnt_mode),
      .pix_en   (quad_en[q]),
      .pix      (qpix),
      .words    (qwords[q])
    );
  end

  // ---------------- readout channels ----------------
  logic [NCH-1:0] ro_done, hist_done, ro_seen, hist_seen;

  for (genvar ch = 0; ch < NCH; ch++) begin : g_ch
    localparam int unsigned Q = ch / CH_PER_Q;
    localparam int unsigned J = ch % CH_PER_Q;
    cluster_word_t cw [NW];
    for (genvar r = 0; r < QCR; r++) begin : g_r
      for (genvar c = 0; c < CPC; c++) begin : g_c
        assign cw[r*CPC + c] = qwords[Q][r][J*CPC + c];
      end
    end
    readout_channel #(.N(NW)) u_ch (
      .clk, .rst_n,
      .words       (cw),
      .ro_start    (ro_start),
      .ro_done     (ro_done[ch]),
      .hist_start  (hist_start),
      .hist_done   (hist_done[ch]),
      .cnt_mode    (cnt_mode),
      .img2d       (img2d),
      .hist_all    (hist_all),
      .hist_target (($clog2(NW+1))'(hist_target)),
      .cnt_width   (cnt_width),
      .sout        (sout[ch])
    );
  end

  // All channels finish together; the sticky flags only guard against skew.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_seen <= '0; hist_seen <= '0;
    end else begin
      ro_seen   <= (ro_start   || ro_done_all)   ? '0 : (ro_seen   | ro_done);
      hist_seen <= (hist_start || hist_done_all) ? '0 : (hist_seen | hist_done);
    end
  end

  assign ro_done_all   = &(ro_seen | ro_done);
  assign hist_done_all = &(hist_seen | hist_done);
  assign readout_done  = ro_done_all;

endmodule
