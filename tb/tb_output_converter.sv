// tb_output_converter -- checks every output number system.  Random FP32
// inputs spread over and beyond each format's range must give the nearest
// code (or the largest code beyond range), judged by tb_ref_pkg against the
// neighbouring codes with zero tolerance; the FP32 bypass must return its
// input.  Exact halfway points between two neighbouring codes must round to
// the code with an even last bit, and INT8 must clip at -127 and 127.
module tb_output_converter;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] x, out;
  ofmt_e ofmt;
  int checks = 0, failures = 0;

  output_converter dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    int eb, mb, emax, c;
    real v, lo, hi;
    for (int f = 0; f <= 11; f++) begin
      ofmt = ofmt_e'(f);
      ofmt_em(ofmt, eb, mb);
      emax = (f >= 10) ? 8 : (1 << (eb - 1));
      for (int n = 0; n < 4000; n++) begin
        // exponents from well below the subnormals to above the maximum
        x = {1'($urandom), 8'(127 + $urandom_range(0, emax + 2 + (emax + mb + 4)) - (emax + mb + 4)), 23'($urandom)};
        if (f == OF_FP32 || f == OF_BF16) x[30:23] = 8'($urandom_range(1, 254));
        #1;
        if (f == OF_FP32) chk(out == x, $sformatf("fp32 bypass %h -> %h", x, out));
        else chk(out_is_nearest(ofmt, out, fp32_real(x), 0.0),
                 $sformatf("%s x %g -> %h (%g)", ofmt.name(), fp32_real(x), out, out_real(ofmt, out)));
      end
      // ties: halfway between code c and c+1 goes to the even one
      if (f != OF_FP32 && f < 10) begin
        for (int n = 0; n < 200; n++) begin
          c  = $urandom_range(0, ((((1 << eb) - 2) << mb) | ((1 << mb) - 1)) - 1);
          lo = fmt_real(32'(c), eb, mb);
          hi = fmt_real(32'(c + 1), eb, mb);
          v  = (lo + hi) / 2.0;
          x  = real_fp32(v);
          #1;
          chk(out == 32'((c % 2 == 0) ? c : c + 1),
              $sformatf("%s tie between %0d and %0d -> %0d", ofmt.name(), c, c + 1, out));
        end
      end
    end
    ofmt = OF_INT8;
    x = 32'h43480000;  // 200.0
    #1 chk(out[7:0] == 8'd127, "int8 clip high");
    x = 32'hc3480000;  // -200.0
    #1 chk($signed(out[7:0]) == -8'sd127, "int8 clip low");
    x = 32'h40200000;  // 2.5 -> 2
    #1 chk(out[7:0] == 8'd2, "int8 tie to even");
    ofmt = OF_UINT8;
    x = 32'hbf800000;  // -1.0 -> 0
    #1 chk(out[7:0] == 8'd0, "uint8 clip low");
    x = 32'h43c80000;  // 400.0 -> 255
    #1 chk(out[7:0] == 8'd255, "uint8 clip high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
