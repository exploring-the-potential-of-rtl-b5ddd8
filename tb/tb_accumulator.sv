// tb_accumulator -- drives framed runs of 1 to 8 words, integer and FP32,
// with idle cycles between them.  done must pulse on the cycle after the
// edge that took the last word, with acc equal to the INT32 sum (exact,
// modulo 2^32) or within FP32 rounding of the real sum of the words.
module tb_accumulator;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_is_int = 0;
  logic [31:0] in_word = '0;
  logic [31:0] acc;
  logic acc_is_int, done;
  int checks = 0, failures = 0;

  accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    int nb;
    logic [31:0] isum;
    real rsum, rabsum;
    bit ii;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      nb = $urandom_range(1, 8);
      ii = 1'($urandom);
      isum = '0; rsum = 0.0; rabsum = 0.0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 1; in_first = (b == 0); in_last = (b == nb - 1); in_is_int = ii;
        if (ii) in_word = $urandom;
        else in_word = {1'($urandom), 8'(110 + $urandom_range(0, 30)), 23'($urandom)};
        isum += in_word;
        rsum += fp32_real(in_word);
        rabsum += rabs(fp32_real(in_word));
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL: done missing"); end
      checks++;
      if (acc_is_int != ii) begin failures++; $display("FAIL: acc_is_int"); end
      checks++;
      if (ii) begin
        if (acc != isum) begin failures++; $display("FAIL: int acc %h expected %h", acc, isum); end
      end else if (rabs(fp32_real(acc) - rsum) > rabsum * 8 * pow2(-24)) begin
        failures++;
        $display("FAIL: fp acc %g expected %g", fp32_real(acc), rsum);
      end
      if ($urandom_range(0, 1) == 1) begin
        @(negedge clk);
        checks++;
        if (done) begin failures++; $display("FAIL: done held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
