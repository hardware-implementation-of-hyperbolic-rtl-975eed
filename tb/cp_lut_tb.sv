// cp_lut_tb: checks all 32 segments of the control-point table.
// The expected points are computed here from $tanh: P(i) = round(tanh(i/8)
// * 2^13), with P(-1) = round(tanh(-1/8) * 2^13) for the first segment.
module cp_lut_tb;
  import tanh_pkg::*;

  logic [IDX_W-1:0] idx;
  cp_vec_t          p;
  int checks = 0, failures = 0;

  cp_lut dut (.idx(idx), .p(p));

  function automatic int ref_p(int i);
    real v;
    v = $tanh(real'(i) / 8.0) * 8192.0;
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  task automatic check(string what, int got, int expv);
    checks++;
    if (got != expv) begin
      failures++;
      $display("%s mismatch idx=%0d got=%0d exp=%0d", what, idx, got, expv);
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
    for (int k = 0; k < SEGS; k++) begin
      idx = IDX_W'(k);
      #1;
      check("P(k-1)", int'(p.km1), ref_p(k - 1));
      check("P(k)",   int'(p.k0),  ref_p(k));
      check("P(k+1)", int'(p.kp1), ref_p(k + 1));
      check("P(k+2)", int'(p.kp2), ref_p(k + 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
