// tb_expmax_shift -- checks the aligner at its default size (16 products,
// 9-bit exponents, 22-bit magnitudes, 8 guard bits).  For random products,
// some of them zero, expmax must be the largest exponent among the nonzero
// products, and each term must be
//   (-1)^sign * floor(mag * 2^8 / 2^(expmax - exp)),
// worked out with reals.
module tb_expmax_shift;
  localparam int N = 16, EW = 9, PW = 22, G = 8;

  logic                 sign [N];
  logic [EW-1:0]        exp  [N];
  logic [PW-1:0]        mag  [N];
  logic [EW-1:0]        expmax;
  logic signed [PW+G:0] term [N];
  int checks = 0, failures = 0;

  expmax_shift #(.N(N), .EW(EW), .PW(PW), .G(G)) dut (.*);

  initial begin
    int base, want_max;
    real tv, d;
    for (int n = 0; n < 3000; n++) begin
      base = $urandom_range(0, 400);
      want_max = 0;
      for (int i = 0; i < N; i++) begin
        sign[i] = 1'($urandom);
        exp[i]  = EW'(base + $urandom_range(0, (n % 3 == 0) ? 40 : 6));
        mag[i]  = ($urandom_range(0, 5) == 0) ? '0 : PW'($urandom);
        // a zero product with the largest exponent must not count
        if (i == 3 && n % 2 == 0) begin mag[i] = '0; exp[i] = 9'd510; end
        if (mag[i] != 0 && int'(exp[i]) > want_max) want_max = int'(exp[i]);
      end
      #1;
      checks++;
      if (int'(expmax) != want_max) begin
        failures++;
        $display("FAIL: expmax %0d expected %0d", expmax, want_max);
      end
      for (int i = 0; i < N; i++) begin
        if (mag[i] == 0) continue;
        d  = real'(mag[i]) * 256.0;
        for (int s = 0; s < want_max - int'(exp[i]); s++) d = d / 2.0;
        tv = real'(longint'(d - 0.5 + 1.0e-9));   // floor of a non-negative value
        if (d < 1.0) tv = 0.0;
        if (sign[i]) tv = -tv;
        checks++;
        if (real'(term[i]) != tv) begin
          failures++;
          if (failures < 10) $display("FAIL: term %0d = %0d expected %g", i, term[i], tv);
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
