// tb_flex8_dot_unit -- end-to-end test of the flexible-format dot-product
// unit at its default size (LANES = 16, 32 element pairs per beat).
//
// Runs random dot products of 1 to 4 beats in every input number system and
// writes the results in every output number system.  The expected value is
// worked out with `real` arithmetic from the element codes:
//   y = (sum x*w + bias) * scale
// A float32 result must lie within a tolerance set by the unit's
// truncating alignment (G guard bits) and FP32 rounding; a narrower output
// must be the nearest code of its format to y, or its largest code when y
// is beyond range.  The test also checks that out_valid comes exactly 3
// clock edges after the last beat, that FP16/BF16 ignore the upper half of
// a beat, and counts each mechanism of the design: every input and output
// format, subnormal inputs, products needing alignment shifts, idle right
// stream, multi-beat accumulation, bias, output saturation and INT8 clipping.
// A mechanism that never occurs counts as a failure.
module tb_flex8_dot_unit;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  localparam int LANES = 16;
  localparam int NOPS  = 600;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  ifmt_e       ifmt = IF_INT8;
  ofmt_e       ofmt = OF_FP32;
  logic [15:0] x [2*LANES];
  logic [15:0] w [2*LANES];
  logic [31:0] bias = '0, scale = '0;
  logic        out_valid;
  logic [31:0] out_data;

  flex8_dot_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Expected results, in issue order.
  real    exp_y   [$];
  real    exp_tol [$];
  ofmt_e  exp_fmt [$];
  longint exp_cyc [$];

  // Mechanism counters.
  int n_ifmt [11];
  int n_ofmt [12];
  int n_sub, n_align, n_idle, n_multi, n_bias, n_sat, n_clip;

  task automatic fail(input string msg);
    failures++;
    $display("FAIL: %s", msg);
  endtask

  // Random raw element of format f.  sub forces the exponent field to 0.
  function automatic logic [15:0] rand_elem(input ifmt_e f, input bit sub);
    int eb, mb;
    logic [15:0] r;
    r = 16'($urandom);
    if (f == IF_INT8 || f == IF_UINT8) return {8'd0, r[7:0]};
    ifmt_em(f, eb, mb);
    r = r & 16'((1 << (eb + mb + 1)) - 1);
    if (f == IF_BF16) r[14:7] = 8'(100 + $urandom_range(0, 50));
    if (sub) r = r & ~(16'(((1 << eb) - 1) << mb));
    return r;
  endfunction

  function automatic real fmt_max(input ofmt_e f);
    int eb, mb;
    if (f == OF_INT8)  return 127.0;
    if (f == OF_UINT8) return 255.0;
    ofmt_em(f, eb, mb);
    return fmt_real(32'((((1 << eb) - 2) << mb) | ((1 << mb) - 1)), eb, mb);
  endfunction

  task automatic run_op();
    int nb, nuse, eb, mb;
    real acc, sabs, pmax, pmin, p, yref, tol, tgt, sc, bs;
    bit sub;
    ifmt_e f;
    ofmt_e of;
    f  = ifmt_e'($urandom_range(0, 10));
    of = ofmt_e'($urandom_range(0, 11));
    nb = $urandom_range(1, 4);
    sub = ($urandom_range(0, 3) == 0);
    nuse = (f == IF_FP16 || f == IF_BF16) ? LANES : 2 * LANES;
    acc = 0.0; sabs = 0.0;
    n_ifmt[f]++;
    n_ofmt[of]++;
    if (nb > 1) n_multi++;
    if (nuse == LANES) n_idle++;
    if (sub && f != IF_INT8 && f != IF_UINT8) n_sub++;
    // Bias: zero half the time.
    bs = 0.0;
    bias = '0;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_first = (b == 0);
      in_last  = (b == nb - 1);
      ifmt     = f;
      pmax = 0.0; pmin = 1.0e300;
      for (int k = 0; k < 2 * LANES; k++) begin
        x[k] = rand_elem(f, sub && ($urandom_range(0, 1) == 0));
        w[k] = rand_elem(f, 1'b0);
        if (k < nuse) begin
          p = in_real(f, x[k]) * in_real(f, w[k]);
          acc  += p;
          sabs += rabs(p);
          if (rabs(p) > pmax) pmax = rabs(p);
          if (p != 0.0 && rabs(p) < pmin) pmin = rabs(p);
        end
      end
      if (f != IF_INT8 && f != IF_UINT8 && pmax >= 2.0 * pmin) n_align++;
      if (b == nb - 1) begin
        if ($urandom_range(0, 1) == 1) begin
          bias = real_fp32((($urandom_range(0, 1) == 1) ? 1.0 : -1.0)
                           * (sabs + 1.0) * real'($urandom_range(1, 100)) / 100.0);
          bs = fp32_real(bias);
          n_bias++;
        end
        // Scale: aim the result into the output format's range, past it
        // now and then to exercise saturation.
        if (of == OF_FP32) tgt = 1.0;
        else tgt = fmt_max(of) * real'($urandom_range(1, 130)) / 100.0;
        sc = (rabs(acc + bs) > 0.0) ? tgt / rabs(acc + bs) : 1.0;
        if (of == OF_FP32) sc = real'($urandom_range(1, 1000)) / 100.0;
        scale = real_fp32(sc);
        sc = fp32_real(scale);
        ofmt = of;
        yref = (acc + bs) * sc;
        tol  = (sabs * pow2(-15) + (rabs(acc) + rabs(bs)) * pow2(-21)) * sc + pow2(-140);
        if (of != OF_FP32 && rabs(yref) > fmt_max(of) * 1.01) n_sat++;
        if (of == OF_INT8 && rabs(yref) > 128.0) n_clip++;
        exp_y.push_back(yref);
        exp_tol.push_back(tol);
        exp_fmt.push_back(of);
        exp_cyc.push_back(cycle + 3);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_first = 1'b0;
    in_last  = 1'b0;
    // Random idle gaps between dot products.
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  // Check every output against the oldest expectation.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real y, t, tl, q;
      ofmt_e of;
      longint ec;
      if (exp_y.size() == 0) begin
        fail("out_valid with nothing outstanding");
      end else begin
        t  = exp_y.pop_front();
        tl = exp_tol.pop_front();
        of = exp_fmt.pop_front();
        ec = exp_cyc.pop_front();
        checks++;
        if (cycle != ec) fail($sformatf("latency: result at cycle %0d, expected %0d", cycle, ec));
        checks++;
        if (of == OF_FP32) begin
          y = fp32_real(out_data);
          if (rabs(y - t) > tl)
            fail($sformatf("fp32 result %g expected %g (tol %g)", y, t, tl));
        end else begin
          q = out_real(of, out_data);
          if (!out_is_nearest(of, out_data, t, tl))
            fail($sformatf("ofmt %s code %h = %g, expected nearest to %g", of.name(), out_data, q, t));
        end
      end
    end
  end

  initial begin
    for (int k = 0; k < 2 * LANES; k++) begin x[k] = '0; w[k] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    for (int n = 0; n < NOPS; n++) run_op();
    repeat (8) @(negedge clk);
    checks++;
    if (exp_y.size() != 0) fail($sformatf("%0d results never came out", exp_y.size()));
    for (int i = 0; i < 11; i++) begin
      checks++;
      if (n_ifmt[i] == 0) fail($sformatf("input format %0d never used", i));
    end
    for (int i = 0; i < 12; i++) begin
      checks++;
      if (n_ofmt[i] == 0) fail($sformatf("output format %0d never used", i));
    end
    $display("mechanisms: subnormal inputs %0d, alignment shifts %0d, idle right stream %0d, multi-beat %0d, bias %0d, saturation %0d, int8 clip %0d",
             n_sub, n_align, n_idle, n_multi, n_bias, n_sat, n_clip);
    checks += 7;
    if (n_sub == 0)   fail("no subnormal inputs");
    if (n_align == 0) fail("no alignment shifts");
    if (n_idle == 0)  fail("right stream never idle");
    if (n_multi == 0) fail("no multi-beat accumulation");
    if (n_bias == 0)  fail("no bias");
    if (n_sat == 0)   fail("no output saturation");
    if (n_clip == 0)  fail("no INT8 clipping");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog.
  initial begin
    repeat (NOPS * 12 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
