// mac_unit: the dot product of the P vector and the t vector (eq. (3)).
//
// f = (P(k-1)c0 + P(k)c1 + P(k+1)c2 + P(k+2)c3) / 2. The four signed products
// are summed exactly, the halving of the Catmull-Rom matrix (left out of
// eq. (3) as printed) and the drop to 13 fraction bits are done by one
// rounding shift (round half up), and the result is clamped to the 13-bit
// range [0, 1 - 2^-13] of tanh on |x| < 4. The paper calls this block a MAC
// and gives its 13-bit output; it does not say how many multipliers it has or
// how many cycles it takes. Here all four products are formed in parallel in
// one combinational stage, so a new x can enter every cycle; the clamp and
// rounding mode are this design's choices.
//
// Interface: p (four signed 14-bit control points), c[0..3] (signed t-vector
// elements with TV_FRAC fraction bits) in; y (13-bit unsigned fraction) out.
// Timing: purely combinational.
module mac_unit
  import tanh_pkg::*;
#(
  parameter int unsigned TV_FRAC = 10
)(
  input  cp_vec_t                   p,
  input  logic signed [TV_FRAC+2:0] c [4],
  output logic        [CP_W-1:0]    y
);

  localparam int unsigned PROD_W = (CP_W + 1) + (TV_FRAC + 3);
  localparam int unsigned ACC_W  = PROD_W + 2;
  localparam int unsigned SH     = TV_FRAC + 1;   // halve, drop TV_FRAC bits

  localparam logic signed [ACC_W-1:0] Y_MAX = ACC_W'((1 << CP_W) - 1);

  logic signed [ACC_W-1:0] acc, rnd;

  always_comb begin
    acc = ACC_W'(p.km1 * c[0]) + ACC_W'(p.k0 * c[1])
        + ACC_W'(p.kp1 * c[2]) + ACC_W'(p.kp2 * c[3]);
    rnd = (acc + (ACC_W'(1) <<< (SH - 1))) >>> SH;
    if (rnd < 0)
      y = '0;
    else if (rnd > Y_MAX)
      y = '1;
    else
      y = rnd[CP_W-1:0];
  end

endmodule
