// phase_rotator_model: behavioural model of the CML phase rotator.
//
// Not synthesizable; used by testbenches in place of the analog circuit. The
// output clock is the input clock delayed by a fixed insertion delay plus a
// fraction of the period set by the switch controls:
//   I weight = value of SELN (binary weights 1..64), sign +1 if PL else -1
//   Q weight = value of SEL,                          sign +1 if PR else -1
// IDEAL=0: phase = atan2(Q, I), the interpolator's real, non-uniform law.
// IDEAL=1: phase follows the code linearly (quadrant*128 + position)/512,
//          a perfectly calibrated rotator.
// Changes of the controls take effect on following edges. Time unit: 1 ps.
module phase_rotator_model #(
  parameter real T_PS   = 2500.0,   // input clock period
  parameter real INS_PS = 40.0,     // fixed insertion delay
  parameter bit  IDEAL  = 1'b1
) (
  input  logic       clk_in,
  input  logic       pl,
  input  logic       pr,
  input  logic [6:0] sel,
  input  logic [6:0] seln,
  output logic       clk_out
);

  localparam real PI = 3.14159265358979;

  function automatic real phase_frac();
    real wi, wq, ph;
    int  quad, pos;
    if (IDEAL) begin
      quad = pl ? (pr ? 0 : 3) : (pr ? 1 : 2);
      pos  = (quad % 2 == 0) ? int'(sel) : 127 - int'(sel);
      return real'(quad * 128 + pos) / 512.0;
    end
    wi = pl ? real'(seln) : -real'(seln);
    wq = pr ? real'(sel)  : -real'(sel);
    ph = $atan2(wq, wi);
    if (ph < 0.0) ph = ph + 2.0 * PI;
    return ph / (2.0 * PI);
  endfunction

  real d;
  initial clk_out = 1'b0;

  always @(clk_in) begin
    d = INS_PS + phase_frac() * T_PS;
    clk_out <= #(d) clk_in;
  end

endmodule
