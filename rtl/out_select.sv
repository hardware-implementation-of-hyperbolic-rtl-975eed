// out_select: sign restore of the result (output multiplexer and sign
// extension of the data flow).
//
// tanh(-x) = -tanh(x): the sign bit of the original x selects either the
// plain 13-bit magnitude (x >= 0) or its two's complement (x < 0), and the
// chosen 14-bit signed value is sign-extended to the 16-bit Q2.13 output
// word. The paper draws the multiplexer, its select from the input sign bit,
// and the 16-bit output; the widths inside are this design's choice.
//
// Interface: sign (x[15]), pos (13 bits), neg (14 bits, signed) in; y (16
// bits, signed Q2.13) out.
// Timing: purely combinational.
module out_select
  import tanh_pkg::*;
(
  input  logic                    sign,
  input  logic        [CP_W-1:0]  pos,
  input  logic signed [CP_W:0]    neg,
  output logic signed [X_W-1:0]   y
);

  logic signed [CP_W:0] sel;

  always_comb begin
    sel = sign ? neg : $signed({1'b0, pos});
    y   = X_W'(sel);      // sign extension of the signed 14-bit value
  end

endmodule
