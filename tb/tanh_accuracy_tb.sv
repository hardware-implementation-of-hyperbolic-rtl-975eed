// tanh_accuracy_tb: reproduces the error figures of the 0.125-step
// Catmull-Rom interpolator with wide interpolation weights.
//
// The unit is built with 16 fraction bits in its t vector, where weight
// rounding no longer matters, and every input code with -4 < x < 4 is
// applied. Each result must equal the bit-exact reference model, and over
// the whole range the RMS error against the true tanh must not exceed
// 0.0000525 and the maximum error 0.000152 (0.000052 and 0.000152 are the
// published figures for this step size; the bounds allow for their
// rounding to two significant digits). Results are one clock after the
// operand, as in the default unit.
module tanh_accuracy_tb;
  import tanh_pkg::*;
  import tanh_ref_pkg::*;

  localparam int TV_FRAC_WIDE = 16;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  in_valid;
  logic signed [X_W-1:0] x;
  logic                  out_valid;
  logic signed [X_W-1:0] y;

  int  checks = 0, failures = 0, n_err = 0;
  real max_err = 0.0, sq_err = 0.0, rms;

  tanh_top #(.TV_FRAC(TV_FRAC_WIDE)) dut (.clk(clk), .rst_n(rst_n),
      .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y));

  always #1 clk = ~clk;

  initial begin
    repeat (300_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real err;
    rst_n = 1'b0;
    in_valid = 1'b0;
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = -32767; v < 32768; v++) begin
      in_valid = 1'b1;
      x = X_W'(v);
      @(negedge clk);
      checks += 2;
      if (!out_valid) failures++;
      if (int'(y) != ref_tanh(v, TV_FRAC_WIDE)) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %0d", v, y,
                                    ref_tanh(v, TV_FRAC_WIDE));
      end
      err = real'(y) / 8192.0 - $tanh(real'(v) / 8192.0);
      if (err < 0.0) err = -err;
      sq_err += err * err;
      n_err++;
      if (err > max_err) max_err = err;
    end
    rms = $sqrt(sq_err / n_err);
    $display("error vs tanh over %0d codes: rms %.7f, max %.7f", n_err, rms, max_err);
    checks += 2;
    if (rms > 0.0000525) begin failures++; $display("RMS error too large"); end
    if (max_err > 0.000152) begin failures++; $display("max error too large"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
