// tanh_pkg: number formats, shared types and the control-point table of the
// Catmull-Rom tanh unit.
//
// Formats. The input x and the output tanh(x) are 16-bit two's-complement
// fixed-point numbers with one sign bit, two integer bits and 13 fraction
// bits (Q2.13), so the resolution is 2^-13 on both sides. |x| is 15 bits. Its
// top five bits select one of 32 segments of width 0.125 on [0, 4); its low
// ten bits are the position t inside the segment, a fraction in [0, 1).
//
// Control points. P(i) = round(tanh(i * 0.125) * 2^13) for i = 0 .. 33, held
// as 13-bit unsigned fractions. Segment k needs P(k-1) .. P(k+2); P(-1) is
// taken as -P(1) because tanh is odd, and P(32), P(33) (x = 4.0 and 4.125)
// are the two points past the last segment. The paper fixes the 0.125 step,
// the 32-entry depth, the 5-bit index and the 13-bit precision; keeping the
// two points past x = 4 and folding P(-1) by symmetry are this design's
// choices.
package tanh_pkg;

  localparam int unsigned X_W    = 16;  // input / output width (Q2.13)
  localparam int unsigned FRAC_W = 13;  // fraction bits of x, tanh(x) and P
  localparam int unsigned MAG_W  = 15;  // |x| width
  localparam int unsigned IDX_W  = 5;   // segment index width (step 0.125)
  localparam int unsigned T_W    = 10;  // interpolation factor width
  localparam int unsigned SEGS   = 32;  // control-point LUT depth
  localparam int unsigned CP_W   = FRAC_W;  // control-point magnitude width

  // One control point: 13 fraction bits plus a sign, needed only for P(-1).
  typedef logic signed [CP_W:0] cp_t;

  // The P vector of eq. (3): the four control points around segment k.
  typedef struct packed {
    cp_t km1;  // P(k-1)
    cp_t k0;   // P(k)
    cp_t kp1;  // P(k+1)
    cp_t kp2;  // P(k+2)
  } cp_vec_t;

  // P(i) = round(tanh(i / 8) * 8192), i = 0 .. 33. Written as a case
  // statement so that synthesis maps it to logic, not to a memory.
  function automatic logic [CP_W-1:0] cp_value(input logic [IDX_W:0] i);
    logic [CP_W-1:0] p;
    case (i)
       0: p = 13'd0;      1: p = 13'd1019;   2: p = 13'd2006;   3: p = 13'd2936;
       4: p = 13'd3786;   5: p = 13'd4543;   6: p = 13'd5203;   7: p = 13'd5766;
       8: p = 13'd6239;   9: p = 13'd6630;  10: p = 13'd6949;  11: p = 13'd7208;
      12: p = 13'd7415;  13: p = 13'd7580;  14: p = 13'd7712;  15: p = 13'd7816;
      16: p = 13'd7897;  17: p = 13'd7962;  18: p = 13'd8012;  19: p = 13'd8051;
      20: p = 13'd8082;  21: p = 13'd8106;  22: p = 13'd8125;  23: p = 13'd8140;
      24: p = 13'd8151;  25: p = 13'd8160;  26: p = 13'd8167;  27: p = 13'd8173;
      28: p = 13'd8177;  29: p = 13'd8180;  30: p = 13'd8183;  31: p = 13'd8185;
      32: p = 13'd8187;  33: p = 13'd8188;
      default: p = '0;
    endcase
    return p;
  endfunction

endpackage
