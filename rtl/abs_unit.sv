// abs_unit: absolute value of the Q2.13 input ("ABS (x)" of the data flow).
//
// Because tanh is odd, the datapath works on |x| only and restores the sign
// at the end. The 16-bit two's-complement x becomes a 15-bit unsigned
// magnitude. The single input with no 15-bit magnitude, x = -4.0 (0x8000),
// is saturated to 0x7FFF, the largest magnitude; this corner case is not
// covered by the paper and is this design's choice.
//
// Interface: x (16 bits, signed Q2.13) in, mag (15 bits, U2.13) out.
// Timing: purely combinational.
module abs_unit
  import tanh_pkg::*;
(
  input  logic signed [X_W-1:0]   x,
  output logic        [MAG_W-1:0] mag
);

  logic signed [X_W-1:0] neg_x;

  always_comb begin
    neg_x = -x;
    if (!x[X_W-1])
      mag = x[MAG_W-1:0];
    else if (neg_x[X_W-1])          // -(-4.0) overflows: saturate
      mag = '1;
    else
      mag = neg_x[MAG_W-1:0];
  end

endmodule
