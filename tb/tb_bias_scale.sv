// tb_bias_scale -- checks y = (acc + bias) * scale for random INT32 and
// FP32 sums, biases and scales against real arithmetic: y must lie within
// the three roundings (int-to-float, add, multiply) of the exact value.
// Exact cases (bias 0, scale 1, small integers) must match exactly.
module tb_bias_scale;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] acc, bias, scale, y;
  logic acc_is_int;
  int checks = 0, failures = 0;

  bias_scale dut (.*);

  function automatic logic [31:0] rfp(input int lo, input int hi);
    return {1'($urandom), 8'($urandom_range(lo, hi)), 23'($urandom)};
  endfunction

  initial begin
    real a, want, got, tol;
    for (int n = 0; n < 20000; n++) begin
      acc_is_int = (n % 2 == 0);
      acc   = acc_is_int ? ((n % 4 == 0) ? 32'($signed(32'($urandom)) >>> 12) : $urandom) : rfp(100, 150);
      bias  = (n % 5 == 0) ? 32'd0 : rfp(100, 150);
      scale = (n % 7 == 0) ? 32'h3f800000 : rfp(110, 140);
      #1;
      a    = acc_is_int ? real'($signed(acc)) : fp32_real(acc);
      want = (a + fp32_real(bias)) * fp32_real(scale);
      tol  = (rabs(a) + rabs(fp32_real(bias))) * rabs(fp32_real(scale)) * pow2(-22);
      if (acc_is_int && bias == 0 && scale == 32'h3f800000 && rabs(a) < 16777216.0) tol = 0.0;
      got = fp32_real(y);
      checks++;
      if (rabs(got - want) > tol) begin
        failures++;
        if (failures < 10) $display("FAIL: acc %h bias %h scale %h -> %g expected %g", acc, bias, scale, got, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
