// mac_unit_tb: checks the dot-product unit.
// Directed cases: a weight vector that selects one control point (c = 2 on
// that point, 0 elsewhere) must return that point; negative results must
// clamp to 0 and results of 1.0 or more to 0x1FFF. Random cases: control
// points in [-2^13, 2^13) and weights in the signed t-vector range; the
// expected value is (sum of products + 2^TV_FRAC) >> (TV_FRAC + 1), computed
// with 64-bit integers, then clamped.
module mac_unit_tb;
  import tanh_pkg::*;

  localparam int unsigned TV_FRAC = 10;

  cp_vec_t                   p;
  logic signed [TV_FRAC+2:0] c [4];
  logic        [CP_W-1:0]    y;
  int checks = 0, failures = 0;

  mac_unit #(.TV_FRAC(TV_FRAC)) dut (.p(p), .c(c), .y(y));

  function automatic longint expect_y(longint pv[4], longint cv[4]);
    longint acc, r;
    acc = 0;
    for (int i = 0; i < 4; i++) acc += pv[i] * cv[i];
    r = (acc + (longint'(1) << TV_FRAC)) >>> (TV_FRAC + 1);
    if (r < 0) r = 0;
    if (r > 8191) r = 8191;
    return r;
  endfunction

  task automatic apply(longint pv[4], longint cv[4]);
    longint e;
    p.km1 = cp_t'(pv[0]); p.k0 = cp_t'(pv[1]); p.kp1 = cp_t'(pv[2]); p.kp2 = cp_t'(pv[3]);
    for (int i = 0; i < 4; i++) c[i] = (TV_FRAC+3)'(cv[i]);
    #1;
    e = expect_y(pv, cv);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 20)
        $display("mac mismatch p=%0d,%0d,%0d,%0d c=%0d,%0d,%0d,%0d y=%0d exp=%0d",
                 pv[0], pv[1], pv[2], pv[3], cv[0], cv[1], cv[2], cv[3], y, e);
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
    longint pv[4], cv[4], two;
    two = longint'(2) << TV_FRAC;
    // selecting a single control point returns it unchanged
    for (int sel = 0; sel < 4; sel++) begin
      for (int i = 0; i < 4; i++) begin
        pv[i] = 1000 * (i + 1) + 7;
        cv[i] = (i == sel) ? two : 0;
      end
      apply(pv, cv);
      checks++;
      if (longint'(y) != pv[sel]) begin
        failures++;
        $display("select %0d: y=%0d exp=%0d", sel, y, pv[sel]);
      end
    end
    // midpoint of equal points: 0.5*(P + P) = P
    pv = '{4000, 4000, 4000, 4000};
    cv = '{0, two / 2, two / 2, 0};
    apply(pv, cv);
    // negative result clamps to zero
    pv = '{-8000, 0, 0, 0};
    cv = '{two, 0, 0, 0};
    apply(pv, cv);
    checks++;
    if (y != 0) begin failures++; $display("negative clamp y=%0d", y); end
    // result above 1.0 clamps to the largest fraction
    pv = '{0, 8191, 8191, 0};
    cv = '{0, two, two, 0};
    apply(pv, cv);
    checks++;
    if (y != 13'h1FFF) begin failures++; $display("upper clamp y=%0d", y); end
    // random
    for (int n = 0; n < 20000; n++) begin
      for (int i = 0; i < 4; i++) begin
        pv[i] = longint'($urandom_range(16383)) - 8192;
        if (i == 0 || i == 3)
          cv[i] = -longint'($urandom_range(int'(two / 6)));
        else
          cv[i] = longint'($urandom_range(int'(two)));
      end
      apply(pv, cv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
