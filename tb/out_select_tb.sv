// out_select_tb: checks the sign-restore multiplexer and sign extension.
// For every 13-bit magnitude m and both signs, with neg driven by -m, the
// 16-bit output must be +m for sign = 0 and -m for sign = 1. A few cases
// drive pos and neg with unrelated values to show the select really picks.
module out_select_tb;
  import tanh_pkg::*;

  logic                  sign;
  logic        [CP_W-1:0] pos;
  logic signed [CP_W:0]   neg;
  logic signed [X_W-1:0]  y;
  int checks = 0, failures = 0;

  out_select dut (.sign(sign), .pos(pos), .neg(neg), .y(y));

  task automatic check(int expv);
    #1;
    checks++;
    if (int'(y) != expv) begin
      failures++;
      if (failures < 10) $display("mismatch sign=%0b pos=%0d neg=%0d y=%0d exp=%0d",
                                  sign, pos, neg, y, expv);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < (1 << CP_W); m++) begin
      pos = CP_W'(m);
      neg = (CP_W+1)'(-m);
      sign = 1'b0; check(m);
      sign = 1'b1; check(-m);
    end
    pos = 13'd100; neg = -14'sd2000;
    sign = 1'b0; check(100);
    sign = 1'b1; check(-2000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
