// cp_lut: the control-point look-up table (the "P vector" of the design).
//
// For the 5-bit segment index k (the top bits of |x|) it returns the four
// Catmull-Rom control points P(k-1), P(k), P(k+1), P(k+2) of eq. (3), each a
// 13-bit fraction of tanh at a multiple of 0.125. As in the paper the table
// is constant and is written as combinational logic (a constant case
// function that synthesis turns into bit-level mapping), not as a memory macro,
// and only the positive half of tanh is stored. The table itself is in
// tanh_pkg. At k = 0 the point P(-1) = tanh(-0.125) is produced as -P(1),
// using the odd symmetry; this and the two points past x = 4 are this
// design's reading of the 32-deep LUT.
//
// Interface: idx (5 bits) in, p (cp_vec_t, four signed 14-bit points) out.
// Timing: purely combinational.
module cp_lut
  import tanh_pkg::*;
(
  input  logic [IDX_W-1:0] idx,
  output cp_vec_t          p
);

  logic [IDX_W:0] k;   // one bit wider: the table has SEGS + 2 points

  always_comb begin
    k = {1'b0, idx};
    if (idx == '0)
      p.km1 = -cp_t'({1'b0, cp_value((IDX_W+1)'(1))});
    else
      p.km1 = cp_t'({1'b0, cp_value(k - (IDX_W+1)'(1))});
    p.k0  = cp_t'({1'b0, cp_value(k)});
    p.kp1 = cp_t'({1'b0, cp_value(k + (IDX_W+1)'(1))});
    p.kp2 = cp_t'({1'b0, cp_value(k + (IDX_W+1)'(2))});
  end

endmodule
