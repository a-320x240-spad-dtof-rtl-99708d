// pixel_quadrant: one of the four independent 160x120-pixel quadrants.
//
// A quadrant is a grid of GROWS x GCOLS TDC groups (10 x 8 at full size), each
// with its own LFSR, all clocked by the same phase-rotated global clock. The
// quadrant is 120 pixel rows by 160 pixel columns, i.e. 60 x 80 clusters.
// Cluster (r, c) of the quadrant is cluster (r % CROWS, c % CCOLS) of group
// (r / CROWS, c / CCOLS).
//
// Interface and timing are those of tdc_group: pulses on pix are time-stamped
// against the LFSRs during run; words holds all clusters of the quadrant.
//
// From the paper: 160x120 pixels per quadrant, one LFSR per 12x20 pixels.
// This design's choice: the orientation (120 rows x 160 columns, after the
// "120x160 pixel array" label of the clock-distribution figure).
module pixel_quadrant
  import lidar_pkg::*;
#(
  parameter int unsigned GROWS = 10,
  parameter int unsigned GCOLS = 8,
  parameter int unsigned CROWS = 6,
  parameter int unsigned CCOLS = 10,
  localparam int unsigned QCR  = GROWS * CROWS,   // cluster rows
  localparam int unsigned QCC  = GCOLS * CCOLS    // cluster columns
) (
  input  logic                               gclk,
  input  logic                               rst,
  input  logic                               run,
  input  logic                               cnt_mode,
  input  logic                               pix_en,
  input  logic [2*QCC-1:0]                  pix   [2*QCR],
  output cluster_word_t                     words [QCR][QCC]
);

  for (genvar gr = 0; gr < GROWS; gr++) begin : g_grow
    for (genvar gc = 0; gc < GCOLS; gc++) begin : g_gcol
      logic [2*CCOLS-1:0] gpix   [2*CROWS];
      cluster_word_t      gwords [CROWS][CCOLS];

      for (genvar r = 0; r < 2*CROWS; r++) begin : g_pr
        assign gpix[r] = pix[gr*2*CROWS + r][gc*2*CCOLS +: 2*CCOLS];
      end
      for (genvar r = 0; r < CROWS; r++) begin : g_wr
        for (genvar c = 0; c < CCOLS; c++) begin : g_wc
          assign words[gr*CROWS + r][gc*CCOLS + c] = gwords[r][c];
        end
      end

      tdc_group #(.CROWS(CROWS), .CCOLS(CCOLS)) u_grp (
        .gclk     (gclk),
        .rst      (rst),
        .run      (run),
        .cnt_mode (cnt_mode),
        .pix_en   (pix_en),
        .pix      (gpix),
        .words    (gwords)
      );
    end
  end

endmodule
