// interp_vector: the interpolation-factor vector ("t vector") of eq. (3).
//
// For the in-segment position t (10 bits, a fraction in [0, 1)) it computes
// the four cubic polynomials that weight the control points:
//   c0 = -t^3 + 2t^2 - t       in [-0.30, 0]
//   c1 = 3t^3 - 5t^2 + 2       in [0, 2]
//   c2 = -3t^3 + 4t^2 + t      in [0, 2)
//   c3 = t^3 - t^2             in [-0.30, 0]
// These are the rows of eq. (3) exactly as printed, i.e. twice the usual
// Catmull-Rom weights; the factor 1/2 is applied in the MAC.
//
// How: t^2 and t^3 are formed exactly (20 and 30 fraction bits), c0, c2 and
// c3 are summed exactly and each is rounded to TV_FRAC fraction bits (round
// half up). c1 is not computed from its own polynomial but as 2 - c0 - c2 - c3:
// the four polynomials always sum to 2, so this is the same value, costs no
// extra multiplier terms, and makes the rounded weights still sum to exactly
// 2, which keeps the rounding error of the dot product small. TV_FRAC = 10
// follows the 10-bit width printed at this block's output in the paper's data
// flow figure; the exact-sum trick, the rounding mode and the signed format
// (TV_FRAC + 3 bits: sign, two integer bits) are this design's choices. With
// TV_FRAC >= 16 the unit reaches the paper's reported accuracy exactly.
//
// Interface: t (10 bits) in; c[0..3] (signed, TV_FRAC+3 bits, TV_FRAC
// fraction bits) out, c[i] weighting P(k-1+i).
// Timing: purely combinational.
module interp_vector
  import tanh_pkg::*;
#(
  parameter int unsigned TV_FRAC = 10   // fraction bits of each t-vector element
)(
  input  logic        [T_W-1:0]     t,
  output logic signed [TV_FRAC+2:0] c [4]
);

  // Exact arithmetic is done at scale 2^(3*T_W + 1) so that at least one bit
  // is always dropped by the rounding shift below.
  localparam int unsigned SC    = 3 * T_W + 1;   // 31
  localparam int unsigned SH    = SC - TV_FRAC;  // rounding shift
  localparam int unsigned ACC_W = SC + 5;        // holds |value| < 8 plus sign

  logic        [2*T_W-1:0] t2;
  logic        [3*T_W-1:0] t3;
  logic signed [ACC_W-1:0] s1, s2, s3;           // t, t^2, t^3 at scale 2^SC
  logic signed [ACC_W-1:0] e0, e2, e3;           // exact c0, c2, c3
  logic signed [ACC_W-1:0] r0, r2, r3;           // rounded, scale 2^TV_FRAC
  logic signed [ACC_W-1:0] r1;

  initial assert (TV_FRAC >= 1 && TV_FRAC <= SC - 1)
    else $error("interp_vector: TV_FRAC must be 1 .. %0d", SC - 1);

  always_comb begin
    t2 = t * t;
    t3 = t2 * t;
    s1 = ACC_W'(t)  <<< (SC - T_W);
    s2 = ACC_W'(t2) <<< (SC - 2 * T_W);
    s3 = ACC_W'(t3) <<< (SC - 3 * T_W);
    e0 = -s3 + (s2 <<< 1) - s1;
    e2 = -(s3 + (s3 <<< 1)) + (s2 <<< 2) + s1;
    e3 = s3 - s2;
    r0 = (e0 + (ACC_W'(1) <<< (SH - 1))) >>> SH;
    r2 = (e2 + (ACC_W'(1) <<< (SH - 1))) >>> SH;
    r3 = (e3 + (ACC_W'(1) <<< (SH - 1))) >>> SH;
    r1 = (ACC_W'(2) <<< TV_FRAC) - r0 - r2 - r3;
    c[0] = r0[TV_FRAC+2:0];
    c[1] = r1[TV_FRAC+2:0];
    c[2] = r2[TV_FRAC+2:0];
    c[3] = r3[TV_FRAC+2:0];
  end

endmodule
