// twos_complement: negates the 13-bit tanh magnitude from the MAC.
//
// The magnitude is zero-extended to 14 bits and negated (invert and add one),
// giving -|tanh(x)| as a 14-bit two's-complement number with 13 fraction
// bits. The paper names this block and its place in the data flow; the
// 14-bit result width is this design's choice, the smallest that holds the
// negative of every 13-bit magnitude.
//
// Interface: mag (13 bits) in, neg (14 bits, signed) out.
// Timing: purely combinational.
module twos_complement
  import tanh_pkg::*;
(
  input  logic        [CP_W-1:0] mag,
  output logic signed [CP_W:0]   neg
);

  always_comb neg = (~{1'b0, mag}) + 1'b1;

endmodule
