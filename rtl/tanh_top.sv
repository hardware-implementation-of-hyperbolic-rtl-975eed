// tanh_top: hyperbolic tangent of a 16-bit fixed-point number by cubic
// Catmull-Rom spline interpolation.
//
// Data flow (one combinational pass, then one output register):
//   x --abs_unit--> |x| (15 bits)
//   |x|[14:10] --cp_lut-----------> P(k-1), P(k), P(k+1), P(k+2)  (13-bit)
//   |x|[9:0]   --interp_vector----> the four cubic weights of t
//   mac_unit:   dot product / 2 --> |tanh(x)| (13-bit fraction)
//   twos_complement + out_select:   sign of x restored, sign-extended
// The blocks, their order, the 5/10 bit split of |x|, the 13-bit control
// points and MAC result and the 16-bit result follow the paper. The paper
// gives no clocking scheme, only a 500 MHz synthesis target; here the result
// is registered once, with a valid bit, so the unit accepts one x per clock
// and answers one clock later. Reset is asynchronous, active low, and clears
// the output register.
//
// Interface:
//   clk, rst_n          clock, active-low asynchronous reset
//   in_valid, x         operand (signed Q2.13: 1 sign, 2 integer, 13 fraction)
//   out_valid, y        tanh(x), signed Q2.13, valid one cycle after in_valid
// Parameter TV_FRAC sets the fraction bits of the interpolation weights
// (10 as in the paper's figure; 16 or more gives the paper's error figures).
module tanh_top
  import tanh_pkg::*;
#(
  parameter int unsigned TV_FRAC = 10
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] x,
  output logic                  out_valid,
  output logic signed [X_W-1:0] y
);

  logic        [MAG_W-1:0]   mag;
  logic        [IDX_W-1:0]   idx;
  logic        [T_W-1:0]     t;
  cp_vec_t                   p;
  logic signed [TV_FRAC+2:0] c [4];
  logic        [CP_W-1:0]    f_mag;
  logic signed [CP_W:0]      f_neg;
  logic signed [X_W-1:0]     f;

  abs_unit u_abs (.x(x), .mag(mag));

  assign idx = mag[MAG_W-1 -: IDX_W];
  assign t   = mag[T_W-1:0];

  cp_lut u_lut (.idx(idx), .p(p));

  interp_vector #(.TV_FRAC(TV_FRAC)) u_tvec (.t(t), .c(c));

  mac_unit #(.TV_FRAC(TV_FRAC)) u_mac (.p(p), .c(c), .y(f_mag));

  twos_complement u_neg (.mag(f_mag), .neg(f_neg));

  out_select u_sel (.sign(x[X_W-1]), .pos(f_mag), .neg(f_neg), .y(f));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        y <= f;
    end
  end

  // |tanh(x)| < 1: a valid result never leaves (-1, 1) in Q2.13.
  a_out_range: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (y <= X_W'(2**FRAC_W - 1)) && (y >= -X_W'(2**FRAC_W - 1)));

endmodule
