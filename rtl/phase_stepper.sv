// phase_stepper: digital control of the phase rotator (the fine operation).
//
// The phase rotator divides one global-clock period into 2^9 positions. This
// block keeps the nominal position n = SEL0 + s*k, where s is the number of
// steps taken so far in the current measurement: step_clr reloads SEL0 and
// step_adv adds k before the next step starts. Because the rotator's steps
// are not uniform, the position actually applied is n plus a signed trim
// read from a 64-entry calibration table indexed by n[8:3]; the low bits of
// the code thus serve as calibration bits, and with k a multiple of 8, 16 or
// 32 the table corrects every step position.
//
// The applied 9-bit code is split into a quadrant (code[8:7]) and a position
// inside it (code[6:0]) and decoded to the rotator's switch controls:
//   quadrant 0 (I..Q):   PL,PR = 11, SEL =  pos
//   quadrant 1 (Q..IB):  PL,PR = 01, SEL = ~pos
//   quadrant 2 (IB..QB): PL,PR = 00, SEL =  pos
//   quadrant 3 (QB..I):  PL,PR = 10, SEL = ~pos
// and SELN = ~SEL. SEL steers its binary-weighted current (1I..64I) to the
// Q/QB pair and SELN to the I/IB pair, so the interpolated phase turns
// monotonically through all four quadrants.
//
// Timing: all outputs are registered; a step_adv or step_clr takes effect on
// the outputs one clock later. Calibration writes are synchronous.
//
// From the paper: 2^9 steps per period, SEL[6:0]/SELN[6:0] with 1I..64I
// current sources, PL/PR quadrant switches with the quadrant labels of the
// rotator figure, SEL = SEL0 + k, and low bits used for calibration. This
// design's choices: the SEL/SELN assignment to the I and Q pairs, and the
// calibration as an additive trim table (the paper does not say how the
// calibration bits are chosen).
module phase_stepper
  import lidar_pkg::*;
#(
  parameter int unsigned PW        = PHASE_W,   // 9
  parameter int unsigned SW        = SEL_W,     // 7
  parameter int unsigned CAL_IDX_W = 6,
  parameter int unsigned TRIM_W    = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  step_clr,
  input  logic                  step_adv,
  input  logic [PW-1:0]         k,
  input  logic [PW-1:0]         sel0,
  input  logic                  cal_we,
  input  logic [CAL_IDX_W-1:0]  cal_addr,
  input  logic signed [TRIM_W-1:0] cal_data,
  output logic [PW-1:0]         nominal,
  output logic [PW-1:0]         code,
  output logic                  pl,
  output logic                  pr,
  output logic [SW-1:0]         sel,
  output logic [SW-1:0]         seln
);

  logic signed [TRIM_W-1:0] cal_tab [2**CAL_IDX_W];
  logic [PW-1:0]            nom_next;
  logic [PW-1:0]            code_next;
  logic [1:0]               quad;
  logic [SW-1:0]            pos;

  always_comb begin
    nom_next = nominal;
    if (step_clr)      nom_next = sel0;
    else if (step_adv) nom_next = nominal + k;
  end

  // Applied code = nominal + trim (modulo one period).
  assign code_next = nom_next + PW'(cal_tab[nom_next[PW-1 -: CAL_IDX_W]]);  // sign-extended trim

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nominal <= '0;
      code    <= '0;
    end else begin
      nominal <= nom_next;
      code    <= code_next;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2**CAL_IDX_W; i++) cal_tab[i] <= '0;
    end else if (cal_we) begin
      cal_tab[cal_addr] <= cal_data;
    end
  end

  assign quad = code[PW-1 -: 2];
  assign pos  = code[SW-1:0];

  always_comb begin
    unique case (quad)
      2'd0: begin pl = 1'b1; pr = 1'b1; sel =  pos; end
      2'd1: begin pl = 1'b0; pr = 1'b1; sel = ~pos; end
      2'd2: begin pl = 1'b0; pr = 1'b0; sel =  pos; end
      default: begin pl = 1'b1; pr = 1'b0; sel = ~pos; end
    endcase
    seln = ~sel;
  end

endmodule
