// tanh_top_tb: end-to-end test of the tanh unit at its default parameters.
//
// All 65536 input codes are streamed through the unit, one per clock, with
// random bubbles (in_valid low). Each result must appear exactly one cycle
// after its operand, must equal the bit-exact reference model of
// tanh_ref_pkg, and must lie within the accuracy bound of the default
// 10-bit interpolation weights (2.2e-4) of the true tanh, measured with
// $tanh on the open range -4 < x < 4. The RMS and maximum error are printed.
// During bubbles out_valid must be low and y must hold its last value.
// Each mechanism of the data path is counted and must occur at least once:
// positive and negative operands (plain and two's-complement output path),
// the saturating |-4.0|, the odd-symmetry point P(-1) of the first segment,
// the two points past x = 4 used by the last segments, every one of the 32
// segments, and bubbles.
module tanh_top_tb;
  import tanh_pkg::*;
  import tanh_ref_pkg::*;

  localparam int  TV_FRAC_DEF = 10;       // the unit's default
  localparam real MAX_ERR     = 2.2e-4;

  logic                  clk = 1'b0;
  logic                  rst_n;
  logic                  in_valid;
  logic signed [X_W-1:0] x;
  logic                  out_valid;
  logic signed [X_W-1:0] y;

  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_sat = 0, n_mirror = 0, n_tail = 0, n_bubble = 0;
  int seg_hits [SEGS];
  real max_err = 0.0, sq_err = 0.0;
  int  n_err = 0;

  tanh_top dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
                .out_valid(out_valid), .y(y));

  always #1 clk = ~clk;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one operand, checked on the following clock
  task automatic drive(int v);
    int  e, mag;
    real err, tr;
    logic signed [X_W-1:0] y_prev;
    @(negedge clk);
    in_valid = 1'b1;
    x = X_W'(v);
    mag = (v < 0) ? -v : v;
    if (v >= 0) n_pos++; else n_neg++;
    if (v == -32768) n_sat++;
    if (mag > 32767) mag = 32767;
    seg_hits[mag >> 10]++;
    if ((mag >> 10) == 0 && (mag & 1023) != 0) n_mirror++;
    if ((mag >> 10) >= 30 && (mag & 1023) != 0) n_tail++;
    @(negedge clk);
    in_valid = 1'b0;
    e = ref_tanh(v, TV_FRAC_DEF);
    checks++;
    if (!out_valid) fail($sformatf("out_valid low one cycle after x=%0d", v));
    checks++;
    if (int'(y) != e) fail($sformatf("x=%0d y=%0d expected %0d", v, y, e));
    if (v != -32768) begin
      tr  = $tanh(real'(v) / 8192.0);
      err = real'(y) / 8192.0 - tr;
      if (err < 0.0) err = -err;
      sq_err += err * err;
      n_err++;
      if (err > max_err) max_err = err;
      checks++;
      if (err > MAX_ERR) fail($sformatf("x=%0d error %g", v, err));
    end
    // optional bubble: output must hold
    if ($urandom_range(15) == 0) begin
      y_prev = y;
      @(negedge clk);
      n_bubble++;
      checks += 2;
      if (out_valid) fail("out_valid high during bubble");
      if (y != y_prev) fail("y changed during bubble");
    end
  endtask

  initial begin
    foreach (seg_hits[i]) seg_hits[i] = 0;
    rst_n = 1'b0;
    in_valid = 1'b0;
    x = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid) fail("out_valid high in reset");
    rst_n = 1'b1;
    // back-to-back stream: results must come one per clock
    @(negedge clk);
    for (int v = 0; v < 16; v++) begin
      in_valid = 1'b1;
      x = X_W'(v * 2000 - 16000);
      @(negedge clk);
      checks += 2;
      if (!out_valid) fail("stream: out_valid low");
      if (int'(y) != ref_tanh(v * 2000 - 16000, TV_FRAC_DEF)) fail("stream: wrong y");
    end
    in_valid = 1'b0;
    // every input code
    for (int v = -32768; v < 32768; v++) drive(v);
    // mechanism coverage
    checks += 6;
    if (n_pos == 0)    fail("no positive operand");
    if (n_neg == 0)    fail("no negative operand");
    if (n_sat == 0)    fail("no saturating -4.0");
    if (n_mirror == 0) fail("first segment (P(-1)) never used");
    if (n_tail == 0)   fail("last segments (P(32), P(33)) never used");
    if (n_bubble == 0) fail("no bubble");
    foreach (seg_hits[i]) begin
      checks++;
      if (seg_hits[i] == 0) fail($sformatf("segment %0d never used", i));
    end
    $display("operands: %0d positive, %0d negative, %0d saturated, %0d bubbles",
             n_pos, n_neg, n_sat, n_bubble);
    $display("segment 0 with P(-1): %0d, last segments: %0d", n_mirror, n_tail);
    $display("error vs tanh: rms %.7f, max %.7f", $sqrt(sq_err / n_err), max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
