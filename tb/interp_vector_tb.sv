// interp_vector_tb: exhaustive test of the t-vector logic for every 10-bit t.
// The four cubic weights of eq. (3) are evaluated in real arithmetic (exact
// here, as t has 10 bits and t^3 30). c0, c2 and c3 must equal the exact
// weight rounded half up to TV_FRAC fraction bits; c1 must lie within 2 LSB
// of its exact value, and the four must sum to exactly 2.
module interp_vector_tb;
  import tanh_pkg::*;

  localparam int unsigned TV_FRAC = 10;

  logic        [T_W-1:0]     t;
  logic signed [TV_FRAC+2:0] c [4];
  int checks = 0, failures = 0;

  interp_vector #(.TV_FRAC(TV_FRAC)) dut (.t(t), .c(c));

  function automatic longint rnd(real v);
    return longint'($floor(v + 0.5));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("mismatch t=%0d: %s", t, what);
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
    real tr, sc, w0, w1, w2, w3;
    sc = real'(longint'(1) << TV_FRAC);
    for (int i = 0; i < (1 << T_W); i++) begin
      t = T_W'(i);
      #1;
      tr = real'(i) / 1024.0;
      w0 = -tr*tr*tr + 2.0*tr*tr - tr;
      w1 = 3.0*tr*tr*tr - 5.0*tr*tr + 2.0;
      w2 = -3.0*tr*tr*tr + 4.0*tr*tr + tr;
      w3 = tr*tr*tr - tr*tr;
      check(longint'(c[0]) == rnd(w0 * sc), "c0");
      check(longint'(c[2]) == rnd(w2 * sc), "c2");
      check(longint'(c[3]) == rnd(w3 * sc), "c3");
      check(real'(c[1]) - w1 * sc < 2.0 && w1 * sc - real'(c[1]) < 2.0, "c1");
      check(longint'(c[0]) + longint'(c[1]) + longint'(c[2]) + longint'(c[3])
            == 2 * longint'(sc), "sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
