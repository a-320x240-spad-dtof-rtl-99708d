// gate_lfsr: the 6-bit LFSR that generates the 63 coarse time gates.
//
// One LFSR is shared by a 12x20-pixel array (60 clusters) and is clocked by
// the phase-rotated global clock gclk. Outside a measurement window it holds
// the all-zero idle state, which a maximal LFSR never reaches by itself, so
// a photon sampled outside the window reads as "no gate". The first gclk edge
// that sees run=1 loads the seed (gate 1); every further edge moves to the
// next gate, so gate k lasts from the k-th to the (k+1)-th gclk edge of the
// window. run is driven by the control logic in the reference-clock domain;
// gclk is that clock delayed by the phase rotator, so run is sampled with a
// fixed, phase-dependent offset, which is exactly the shift the sensor uses.
//
// From the paper: 6 bits, 63 gates, shared LFSR clocked by the global clock.
// This design's choices: polynomial x^6+x^5+1, seed 000001, idle code 0,
// asynchronous reset.
module gate_lfsr
  import lidar_pkg::*;
#(
  parameter int unsigned W = LFSR_W
) (
  input  logic         gclk,
  input  logic         rst,     // asynchronous, active high
  input  logic         run,     // measurement window
  output logic [W-1:0] state
);

  always_ff @(posedge gclk or posedge rst) begin
    if (rst)                state <= '0;
    else if (!run)          state <= '0;
    else if (state == '0)   state <= W'(LFSR_SEED);
    else                    state <= W'(lfsr_next(LFSR_W'(state)));
  end

endmodule
