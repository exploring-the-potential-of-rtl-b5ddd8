// accumulator -- accumulates the per-cycle partial dot products of one
// output value.
//
// Each valid beat carries one partial result from the stream adder: an INT32
// for integer operands or an FP32 for float operands.  A beat with first set
// loads the register, later beats add to it (integer add, or FP32 add with
// round to nearest even).  On the clock edge that takes a beat with last
// set, done rises for one cycle with the finished sum in acc.  Interface:
// valid/first/last framing, one beat per clock, no back-pressure.
// The paper shows INT32 accumulation for INT8 and FP32 accumulation for
// float formats; the framing and the reset are this design's choices.
module accumulator
  import flex8_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_first,
  input  logic        in_last,
  input  logic        in_is_int,
  input  logic [31:0] in_word,
  output logic [31:0] acc,
  output logic        acc_is_int,
  output logic        done
);

  logic [31:0] nxt;

  always_comb begin
    if (in_first)       nxt = in_word;
    else if (in_is_int) nxt = acc + in_word;
    else                nxt = fp32_add(acc, in_word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      acc_is_int <= 1'b0;
      done       <= 1'b0;
    end else begin
      done <= in_valid && in_last;
      if (in_valid) begin
        acc        <= nxt;
        acc_is_int <= in_is_int;
      end
    end
  end

  // The number system may not change inside one accumulation.
  a_same_sys: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_first |-> in_is_int == acc_is_int);

endmodule
