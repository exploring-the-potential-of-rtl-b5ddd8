// tb_layer_mixed -- runs a small mixed-format network through the unit, the
// kind of workload the format study behind this design evaluates: each
// layer picks its own 8-bit number system, and each layer's output is
// written by the unit directly in the next layer's input format.
//
// Network (sizes are this test's own): 128 -> 32 (INT8) -> 32 (E3M4)
// -> 16 (E2M5) outputs in FP32, each layer y = W x + b with ReLU between
// layers.  Weights
// and input are random reals.  Per-tensor symmetric quantisation with a
// MinMax step is done here in the testbench: step s = max|t| / max code
// value, code = nearest representable value of t / s.  The unit gets the
// integer/FP8 codes, the bias divided by sx*sw and the scale
// sx*sw/s_next, so its output is already the next layer's code (ReLU is
// applied by the testbench to the codes, which is exact for sign-magnitude
// and two's complement alike by zeroing negative codes).
// Checks: every output code is the nearest code to the real value of
// (sum qx*qw + bias) * scale, and the last layer's FP32 results are close to
// the same network run in reals without quantisation (reported, with a
// loose 25 % bound on the relative L2 error).
module tb_layer_mixed;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  localparam int LANES = 16;
  localparam int NL = 3;
  localparam int MAXN = 128;

  logic        clk = 1'b0, rst_n = 1'b0;
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

  int    nin  [NL+1] = '{128, 32, 32, 16};
  ifmt_e lfmt [NL]   = '{IF_INT8, IF_E3M4, IF_E2M5};

  real wr   [NL][MAXN][MAXN];   // real weights [layer][out][in]
  real br   [NL][MAXN];
  real act  [MAXN];             // real-valued reference activations
  real nxt  [MAXN];
  logic [15:0] qa [MAXN];       // activation codes for the current layer
  logic [15:0] qn [MAXN];
  logic [15:0] qw [MAXN][MAXN];
  real   res  [MAXN];

  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 6; i++) s += real'($urandom_range(0, 100000)) / 100000.0;
    return (s - 3.0) / 1.0;
  endfunction

  function automatic ofmt_e as_ofmt(input ifmt_e f);
    case (f)
      IF_INT8: return OF_INT8;
      IF_E5M2: return OF_E5M2;
      IF_E4M3: return OF_E4M3;
      IF_E3M4: return OF_E3M4;
      IF_E2M5: return OF_E2M5;
      default: return OF_FP32;
    endcase
  endfunction

  function automatic real code_max(input ifmt_e f);
    int eb, mb;
    if (f == IF_INT8) return 127.0;
    ifmt_em(f, eb, mb);
    return fmt_real(32'((((1 << eb) - 2) << mb) | ((1 << mb) - 1)), eb, mb);
  endfunction

  // Nearest code of format f to v (search over all codes).
  function automatic logic [15:0] quant(input ifmt_e f, input real v);
    real best, d;
    logic [15:0] bc;
    best = 1.0e300;
    bc = '0;
    for (int c = 0; c < 256; c++) begin
      if (f == IF_INT8 && c == 128) continue;   // -128 is outside the symmetric range
      if (f != IF_INT8 && (c & 127) > int'(quant_maxmag(f))) continue;
      d = rabs(in_real(f, 16'(c)) - v);
      if (d < best) begin best = d; bc = 16'(c); end
    end
    return bc;
  endfunction

  function automatic int quant_maxmag(input ifmt_e f);
    int eb, mb;
    ifmt_em(f, eb, mb);
    return (((1 << eb) - 2) << mb) | ((1 << mb) - 1);
  endfunction

  function automatic real maxabs(input real v [MAXN], input int n);
    real m;
    m = 0.0;
    for (int i = 0; i < n; i++) if (rabs(v[i]) > m) m = rabs(v[i]);
    return m;
  endfunction

  initial begin
    real sx, sw, sn, wmax, bsum, y, ideal_e, ideal_n, sc, bb, tol, sabs;
    int nb, no, ni;
    ifmt_e f;
    ofmt_e of;
    for (int k = 0; k < 2 * LANES; k++) begin x[k] = '0; w[k] = '0; end
    // random network and input
    for (int l = 0; l < NL; l++)
      for (int o = 0; o < nin[l+1]; o++) begin
        for (int i = 0; i < nin[l]; i++) wr[l][o][i] = gauss() / 4.0;
        br[l][o] = gauss() / 8.0;
      end
    for (int i = 0; i < nin[0]; i++) act[i] = rabs(gauss());
    // quantise the input with the first layer's format
    sx = maxabs(act, nin[0]) / code_max(lfmt[0]);
    for (int i = 0; i < nin[0]; i++) qa[i] = quant(lfmt[0], act[i] / sx);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    for (int l = 0; l < NL; l++) begin
      f  = lfmt[l];
      ni = nin[l];
      no = nin[l+1];
      of = (l == NL - 1) ? OF_FP32 : as_ofmt(lfmt[l+1]);
      // weights: per-tensor MinMax step
      wmax = 0.0;
      for (int o = 0; o < no; o++) for (int i = 0; i < ni; i++)
        if (rabs(wr[l][o][i]) > wmax) wmax = rabs(wr[l][o][i]);
      sw = wmax / code_max(f);
      for (int o = 0; o < no; o++) for (int i = 0; i < ni; i++) qw[o][i] = quant(f, wr[l][o][i] / sw);
      // reference real activations of this layer, for the output step
      for (int o = 0; o < no; o++) begin
        nxt[o] = br[l][o];
        for (int i = 0; i < ni; i++) nxt[o] += wr[l][o][i] * act[i];
        if (l != NL - 1 && nxt[o] < 0.0) nxt[o] = 0.0;
      end
      sn = (l == NL - 1) ? 1.0 : maxabs(nxt, no) / code_max(lfmt[l+1]);
      nb = (ni + 2 * LANES - 1) / (2 * LANES);
      for (int o = 0; o < no; o++) begin
        bias  = real_fp32(br[l][o] / (sx * sw));
        scale = real_fp32(sx * sw / sn);
        bb = fp32_real(bias);
        sc = fp32_real(scale);
        bsum = 0.0; sabs = 0.0;
        for (int b = 0; b < nb; b++) begin
          @(negedge clk);
          in_valid = 1'b1; in_first = (b == 0); in_last = (b == nb - 1);
          ifmt = f; ofmt = of;
          for (int k = 0; k < 2 * LANES; k++) begin
            int i;
            i = b * 2 * LANES + k;
            x[k] = (i < ni) ? qa[i] : 16'd0;
            w[k] = (i < ni) ? qw[o][i] : 16'd0;
            if (i < ni) begin
              bsum += in_real(f, x[k]) * in_real(f, w[k]);
              sabs += rabs(in_real(f, x[k]) * in_real(f, w[k]));
            end
          end
        end
        @(negedge clk);
        in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
        while (!out_valid) @(negedge clk);
        y   = (bsum + bb) * sc;
        tol = (sabs * pow2(-15) + (rabs(bsum) + rabs(bb)) * pow2(-21)) * rabs(sc) + pow2(-140);
        checks++;
        if (of == OF_FP32) begin
          res[o] = fp32_real(out_data);
          if (rabs(res[o] - y) > tol) begin
            failures++;
            $display("FAIL: layer %0d out %0d = %g expected %g", l, o, res[o], y);
          end
        end else begin
          if (!out_is_nearest(of, out_data, y, tol)) begin
            failures++;
            $display("FAIL: layer %0d out %0d code %h, expected nearest to %g", l, o, out_data, y);
          end
          // ReLU on the code: a negative code becomes zero
          qn[o] = (out_real(of, out_data) < 0.0) ? 16'd0 : out_data[15:0];
        end
      end
      // hand over to the next layer
      for (int o = 0; o < no; o++) begin
        act[o] = nxt[o];
        if (l != NL - 1) qa[o] = qn[o];
      end
      sx = sn;
      $display("layer %0d: %0d x %0d in %s done", l, no, ni, f.name());
    end
    // compare with the unquantised network
    ideal_e = 0.0; ideal_n = 0.0;
    for (int o = 0; o < nin[NL]; o++) begin
      ideal_e += (res[o] - act[o]) * (res[o] - act[o]);
      ideal_n += act[o] * act[o];
    end
    $display("relative L2 error of the quantised network: %g", (ideal_n > 0.0) ? $sqrt(ideal_e / ideal_n) : 0.0);
    checks++;
    if (ideal_n > 0.0 && $sqrt(ideal_e / ideal_n) > 0.25) begin
      failures++;
      $display("FAIL: quantised network too far from the real-valued one");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
