// tdc_group: one shared LFSR and the 12x20 pixels (6x10 clusters) it serves.
//
// The LFSR runs on the phase-rotated global clock and its state is fanned out
// to every cluster of the group; each cluster time-stamps its own photons by
// sampling that state. Pixel (row, col) belongs to cluster (row/2, col/2);
// inside a cluster the address bit is 2*(row%2) + (col%2).
//
// Interface: pix is the array of pixel pulses, pix_en enables all pixels of
// the group (the per-pixel VSEL of a cluster is driven from it), run opens the
// measurement window, rst clears LFSR and clusters. words is the content of
// every cluster, stable once the window has closed.
//
// From the paper: one LFSR per 12x20 pixels. This design's choices: 12 rows by
// 20 columns, the pixel-to-address mapping and a single enable per group.
module tdc_group
  import lidar_pkg::*;
#(
  parameter int unsigned CROWS = 6,
  parameter int unsigned CCOLS = 10
) (
  input  logic                                   gclk,
  input  logic                                   rst,
  input  logic                                   run,
  input  logic                                   cnt_mode,
  input  logic                                   pix_en,
  input  logic [2*CCOLS-1:0]                     pix   [2*CROWS],
  output cluster_word_t                          words [CROWS][CCOLS]
);

  logic [LFSR_W-1:0] lfsr_state;

  gate_lfsr u_lfsr (
    .gclk  (gclk),
    .rst   (rst),
    .run   (run),
    .state (lfsr_state)
  );

  for (genvar r = 0; r < CROWS; r++) begin : g_row
    for (genvar c = 0; c < CCOLS; c++) begin : g_col
      pixel_cluster u_cl (
        .rst      (rst),
        .pix      ({pix[2*r+1][2*c+1], pix[2*r+1][2*c], pix[2*r][2*c+1], pix[2*r][2*c]}),
        .vsel     ({ADDR_W{pix_en}}),
        .cnt_mode (cnt_mode),
        .lfsr     (lfsr_state),
        .data     (words[r][c].data),
        .addr     (words[r][c].addr)
      );
    end
  end

endmodule
