// pixel_cluster: the 2x2-pixel time-to-digital converter.
//
// Four pixels share one 6-bit TDC made of six TSPC flip-flops and four
// address latches. The enabled pixel pulses (pix & vsel) are combined so that
// any firing pixel produces a rising edge on the cluster event clock; that
// edge makes the TSPCs sample the shared LFSR state. Each pixel pulse also
// sets its own address latch, which keeps the bit until rst. The cluster
// therefore holds 6 bits of time and 4 bits of address, 10 bits in all.
//
// Counter mode (cnt_mode=1): the six TSPCs are reused as a 6-bit event counter
// that counts cluster events and wraps, so idle clusters add counters for
// histogramming or intensity images.
//
// Timing: data and addr change only on pixel pulses; they are read after the
// measurement window, when no further pulses are expected. rst is
// asynchronous and active high.
//
// From the paper: 6 TSPCs clocked through a 4-input gate by any firing pixel,
// LFSR[5:0] as data, 4 address latches with RST, 10 bits per cluster, reuse of
// idle TSPCs as counters. This design's choices: VSEL polarity (1 = enabled),
// latches written as set flops, the counter being a wrapping up-counter, and
// the last photon in the window overwriting earlier ones.
module pixel_cluster
  import lidar_pkg::*;
#(
  parameter int unsigned LFSR_BITS = LFSR_W,
  parameter int unsigned NPIX      = ADDR_W
) (
  input  logic                 rst,
  input  logic [NPIX-1:0]      pix,        // pixel OUT pulses
  input  logic [NPIX-1:0]      vsel,       // pixel enables
  input  logic                 cnt_mode,
  input  logic [LFSR_BITS-1:0] lfsr,
  output logic [LFSR_BITS-1:0] data,
  output logic [NPIX-1:0]      addr
);

  logic [NPIX-1:0] fire;
  logic            ev_clk;

  assign fire   = pix & vsel;
  assign ev_clk = |fire;

  // Six TSPC flip-flops: sample the LFSR, or count in counter mode.
  always_ff @(posedge ev_clk or posedge rst) begin
    if (rst)           data <= '0;
    else if (cnt_mode) data <= data + 1'b1;
    else               data <= lfsr;
  end

  // Address latches: set by their pixel, cleared by RST.
  for (genvar i = 0; i < NPIX; i++) begin : g_addr
    logic latched;
    always_ff @(posedge fire[i] or posedge rst) begin
      if (rst) latched <= 1'b0;
      else     latched <= 1'b1;
    end
    assign addr[i] = latched;
  end

endmodule
