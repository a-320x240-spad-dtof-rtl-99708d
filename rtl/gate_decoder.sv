// gate_decoder: preprocessing of a sampled LFSR state into a gate number.
//
// A cluster stores the raw LFSR state it sampled. Before the data is counted
// or sent, the state is translated into the binary number of its time gate,
// 1..63, with 0 meaning that no photon was seen inside the window (idle
// state). The table is computed at elaboration from the LFSR next-state
// function in lidar_pkg, so it always matches gate_lfsr. Purely
// combinational.
//
// The paper says that data is "preprocessed" before output; using that step
// for LFSR-to-binary decoding is this design's choice.
module gate_decoder
  import lidar_pkg::*;
(
  input  logic [LFSR_W-1:0] lfsr_state,
  output logic [LFSR_W-1:0] gate          // 0 = none, 1..63
);

  function automatic logic [(1<<LFSR_W)*LFSR_W-1:0] build_table();
    logic [(1<<LFSR_W)*LFSR_W-1:0] t;
    logic [LFSR_W-1:0] cur;
    t   = '0;
    cur = LFSR_SEED;
    for (int unsigned i = 1; i <= NUM_GATES; i++) begin
      t[cur*LFSR_W +: LFSR_W] = LFSR_W'(i);
      cur = lfsr_next(cur);
    end
    return t;
  endfunction

  localparam logic [(1<<LFSR_W)*LFSR_W-1:0] GATE_TABLE = build_table();

  assign gate = GATE_TABLE[lfsr_state*LFSR_W +: LFSR_W];

endmodule
