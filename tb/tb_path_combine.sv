// tb_path_combine -- checks the stream adder.  Integer mode: the word must
// be the exact INT32 sum of the two stream sums.  Float mode: the FP32 word
// must lie within one FP32 rounding step (plus the alignment truncation of
// the smaller operand, 2^-24 of the larger) of sum_l*2^sexp_l +
// sum_r*2^sexp_r, for random sums and exponents, equal and far apart.
module tb_path_combine;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  logic is_int;
  logic signed [34:0] sum_l;
  logic signed [28:0] sum_r;
  logic signed [11:0] sexp_l, sexp_r;
  logic [31:0] word;
  int checks = 0, failures = 0;

  path_combine #(.SWL(35), .SWR(29)) dut (.*);

  initial begin
    real want, got, big;
    for (int n = 0; n < 20000; n++) begin
      is_int = (n % 3 == 0);
      sum_l  = 35'($urandom) ^ (35'($urandom) << 3);
      sum_r  = 29'($urandom);
      if (n % 7 == 0) sum_l = '0;
      if (n % 11 == 0) sum_r = '0;
      if (n % 13 == 0) sum_r = 29'(-(sum_l >>> 6));
      if (is_int) begin
        sum_l = sum_l >>> 10;
        sexp_l = '0;
        sexp_r = '0;
      end else begin
        sexp_l = 12'($urandom_range(0, 120)) - 12'sd80;
        sexp_r = (n % 2 == 0) ? sexp_l + 12'($urandom_range(0, 8)) - 12'sd4
                              : 12'($urandom_range(0, 120)) - 12'sd80;
      end
      #1;
      checks++;
      if (is_int) begin
        if ($signed(word) != 32'(longint'(sum_l) + longint'(sum_r))) begin
          failures++;
          if (failures < 10) $display("FAIL: int %0d + %0d -> %0d", sum_l, sum_r, $signed(word));
        end
      end else begin
        want = real'(sum_l) * pow2(int'(sexp_l)) + real'(sum_r) * pow2(int'(sexp_r));
        big  = rabs(real'(sum_l) * pow2(int'(sexp_l)));
        if (rabs(real'(sum_r) * pow2(int'(sexp_r))) > big) big = rabs(real'(sum_r) * pow2(int'(sexp_r)));
        got  = fp32_real(word);
        if (rabs(got - want) > rabs(want) * pow2(-24) + big * pow2(-40) + pow2(-149)) begin
          failures++;
          if (failures < 10) $display("FAIL: fp %g expected %g", got, want);
        end
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
