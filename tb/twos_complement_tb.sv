// twos_complement_tb: exhaustive test of the negation stage. For every
// 13-bit magnitude m the 14-bit signed output must equal -m.
module twos_complement_tb;
  import tanh_pkg::*;

  logic        [CP_W-1:0] mag;
  logic signed [CP_W:0]   neg;
  int checks = 0, failures = 0;

  twos_complement dut (.mag(mag), .neg(neg));

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < (1 << CP_W); m++) begin
      mag = CP_W'(m);
      #1;
      checks++;
      if (int'(neg) != -m) begin
        failures++;
        if (failures < 10) $display("neg mismatch m=%0d neg=%0d", m, neg);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
