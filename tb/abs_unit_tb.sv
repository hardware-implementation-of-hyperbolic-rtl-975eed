// abs_unit_tb: exhaustive test of the absolute-value stage.
// Every 16-bit input is applied and the 15-bit magnitude is compared with
// |x| computed in integer arithmetic, with x = -4.0 expected to saturate to
// the largest magnitude 0x7FFF.
module abs_unit_tb;
  import tanh_pkg::*;

  logic signed [X_W-1:0]   x;
  logic        [MAG_W-1:0] mag;
  int checks = 0, failures = 0;

  abs_unit dut (.x(x), .mag(mag));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      int expv;
      x = X_W'(v);
      expv = (v < 0) ? -v : v;
      if (expv > 32767) expv = 32767;
      #1;
      checks++;
      if (int'(mag) != expv) begin
        failures++;
        if (failures < 10) $display("abs mismatch x=%0d mag=%0d exp=%0d", v, mag, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
