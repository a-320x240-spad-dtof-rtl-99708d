// lidar_pkg: constants and types shared by the SPAD flash-LiDAR sensor RTL.
//
// The sensor encodes photon arrival in two parts. A 6-bit maximal LFSR,
// clocked by a phase-rotated global clock, walks through 63 states during a
// measurement window; each state is one 2.5 ns "time gate". A 2x2-pixel
// cluster samples the LFSR when one of its pixels fires. Between
// measurements the global clock phase is shifted by a fine step (one of 2^9
// positions per clock period), so the coarse gates slide over the photon and
// the fine position is recovered from where the histogram peak changes bin.
//
// Numbers from the paper: 6-bit LFSR, 63 gates, 4 address bits per cluster,
// 10 bits per cluster, 2^9 phase steps, 8/10/12-bit histogram counters.
// Choices of this design: the LFSR polynomial (x^6+x^5+1), its seed, the
// all-zero idle code and the 12-bit payload of a serial frame.
package lidar_pkg;

  localparam int unsigned LFSR_W    = 6;
  localparam int unsigned NUM_GATES = (1 << LFSR_W) - 1;   // 63
  localparam int unsigned ADDR_W    = 4;
  localparam int unsigned WORD_W    = LFSR_W + ADDR_W;     // 10 bits per cluster
  localparam int unsigned PHASE_W   = 9;                   // 2^9 steps per period
  localparam int unsigned SEL_W     = 7;                   // SEL[6:0], 1*I .. 64*I
  localparam int unsigned HIST_W    = 12;                  // widest histogram counter
  localparam int unsigned PAYLOAD_W = 12;                  // serial frame payload

  localparam logic [LFSR_W-1:0] LFSR_SEED = 6'b000001;     // state of gate 1
  localparam logic [LFSR_W-1:0] LFSR_IDLE = 6'b000000;     // outside the window

  // Histogram counter width, selectable per measurement.
  typedef enum logic [1:0] {
    CW8  = 2'd0,
    CW10 = 2'd1,
    CW12 = 2'd2
  } cnt_width_e;

  // What one cluster hands to the readout.
  typedef struct packed {
    logic [LFSR_W-1:0] data;   // sampled LFSR state (or count in counter mode)
    logic [ADDR_W-1:0] addr;   // one bit per pixel that fired
  } cluster_word_t;

  // Kind of serial frame.
  typedef enum logic {
    FR_CLUSTER = 1'b0,
    FR_HIST    = 1'b1
  } frame_kind_e;

  // Next state of the x^6+x^5+1 Fibonacci LFSR (shift left, feedback into bit 0).
  function automatic logic [LFSR_W-1:0] lfsr_next(input logic [LFSR_W-1:0] s);
    return {s[LFSR_W-2:0], s[5] ^ s[4]};
  endfunction

  // Gate number (1..63) of an LFSR state; 0 for the idle state.
  function automatic logic [LFSR_W-1:0] lfsr_to_gate(input logic [LFSR_W-1:0] s);
    logic [LFSR_W-1:0] cur;
    logic [LFSR_W-1:0] g;
    cur = LFSR_SEED;
    g   = '0;
    for (int unsigned i = 1; i <= NUM_GATES; i++) begin
      if (cur == s) g = LFSR_W'(i);
      cur = lfsr_next(cur);
    end
    return g;
  endfunction

  // Saturation value of a histogram counter.
  function automatic logic [HIST_W-1:0] cnt_max(input cnt_width_e w);
    case (w)
      CW8:     return HIST_W'(12'h0FF);
      CW10:    return HIST_W'(12'h3FF);
      default: return HIST_W'(12'hFFF);
    endcase
  endfunction

endpackage
