// tb_add_tree -- checks the adder tree at its default size (16 terms of 31
// bits) and at a size that is not a power of two (5 terms of 10 bits)
// against sums formed in 64-bit integers, including all-maximum and
// all-minimum terms.
module tb_add_tree;
  logic signed [30:0] t16 [16];
  logic signed [34:0] s16;
  logic signed [9:0]  t5 [5];
  logic signed [12:0] s5;
  int checks = 0, failures = 0;

  add_tree #(.N(16), .W(31)) dut16 (.term(t16), .sum(s16));
  add_tree #(.N(5),  .W(10)) dut5  (.term(t5),  .sum(s5));

  initial begin
    longint r16, r5;
    for (int n = 0; n < 5000; n++) begin
      r16 = 0; r5 = 0;
      for (int i = 0; i < 16; i++) begin
        t16[i] = (n == 0) ? 31'sh3fffffff : (n == 1) ? 31'sh40000000 : 31'($urandom);
        r16 += longint'(t16[i]);
      end
      for (int i = 0; i < 5; i++) begin
        t5[i] = (n == 0) ? 10'sd511 : (n == 1) ? -10'sd512 : 10'($urandom);
        r5 += longint'(t5[i]);
      end
      #1;
      checks += 2;
      if (longint'(s16) != r16) begin failures++; $display("FAIL: sum16 %0d expected %0d", s16, r16); end
      if (longint'(s5) != r5)   begin failures++; $display("FAIL: sum5 %0d expected %0d", s5, r5); end
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
