// histogram_unit: 63-bin on-chip histogram with 8/10/12-bit counters.
//
// One counter per time gate. Each accepted event (inc with gate 1..63)
// increments the counter of its gate; gate 0 (no photon) is ignored. The
// counter width is selected per measurement (8, 10 or 12 bits): a counter
// stops at 2^w-1 instead of wrapping, so a saturated bin stays recognisable.
// The sensor has one such unit per output channel (63 bin_cnt x 64 units x 12
// bits of counters).
//
// Interface: inc/inc_gate add one event per clock; clr zeroes all bin_cnt
// (synchronous, takes priority over inc); rd_bin selects a bin and
// rd_count returns it combinationally.
//
// From the paper: 63 bin_cnt, 8-to-12-bit configurable counters, and that 8-bit
// counters saturate. This design's choices: saturation as the overflow rule
// for every width, one event per clock, synchronous clear.
module histogram_unit
  import lidar_pkg::*;
#(
  parameter int unsigned CNT_W    = HIST_W,
  localparam int unsigned NUM_BINS = NUM_GATES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  cnt_width_e        width,
  input  logic              inc,
  input  logic [LFSR_W-1:0] inc_gate,     // 1..NUM_BINS
  input  logic [LFSR_W-1:0] rd_bin,       // 1..NUM_BINS
  output logic [CNT_W-1:0]  rd_count
);

  logic [CNT_W-1:0] bin_cnt [NUM_BINS];
  logic [CNT_W-1:0] maxv;

  assign maxv = CNT_W'(cnt_max(width));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_BINS; i++) bin_cnt[i] <= '0;
    end else if (clr) begin
      for (int i = 0; i < NUM_BINS; i++) bin_cnt[i] <= '0;
    end else if (inc && inc_gate != '0) begin
      if (bin_cnt[inc_gate - 1'b1] < maxv) bin_cnt[inc_gate - 1'b1] <= bin_cnt[inc_gate - 1'b1] + 1'b1;
    end
  end

  assign rd_count = (rd_bin != '0) ? bin_cnt[rd_bin - 1'b1] : '0;

endmodule
