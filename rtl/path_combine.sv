// path_combine -- the adder that joins the two streams' add trees and hands
// the result to the accumulator.
//
// Each stream delivers value = sum * 2^sexp.  For integer operands both
// sexp are 0 and the result is the exact INT32 sum (INT32 as in the paper's
// INT8 data-flow figure).  For floats the stream with the smaller exponent
// is aligned to the other, after the larger has been given 24 extra low
// bits; bits shifted out below that are truncated.  The aligned sum is then
// rounded to nearest even into FP32 (the "FP32" box after the adder in the
// paper's figure).  Keeping INT32 for integer operands, and the alignment
// details, are this design's choices.  Combinational.
module path_combine
  import flex8_pkg::*;
#(
  parameter int SWL = 35,  // left stream sum width
  parameter int SWR = 29   // right stream sum width
) (
  input  logic                  is_int,
  input  logic signed [SWL-1:0] sum_l,
  input  logic signed [11:0]    sexp_l,
  input  logic signed [SWR-1:0] sum_r,
  input  logic signed [11:0]    sexp_r,
  output logic [31:0]           word
);

  localparam int XB = 24;  // extra low bits given to the larger operand

  logic signed [63:0] bg, sml, tot;
  int eb, es, d;
  logic [63:0] m;

  always_comb begin
    if (sexp_l >= sexp_r) begin
      bg = 64'(sum_l); eb = int'(sexp_l);
      sml = 64'(sum_r); es = int'(sexp_r);
    end else begin
      bg = 64'(sum_r); eb = int'(sexp_r);
      sml = 64'(sum_l); es = int'(sexp_l);
    end
    // A zero sum has no exponent worth aligning to.
    if (bg == 0) begin
      bg = sml; eb = es;
      sml = '0;  es = eb;
    end
    bg = bg <<< XB;
    eb  = eb - XB;
    d   = es - eb;
    if (d >= 0)       sml = sml <<< d;
    else if (d > -63) sml = sml >>> (-d);
    else              sml = (sml < 0) ? -64'sd1 : 64'sd0;
    tot = bg + sml;
    m   = tot[63] ? 64'(-tot) : 64'(tot);
    if (is_int) word = 32'(sum_l + sum_r);
    else        word = round_pack(tot[63], m, eb, 8, 23, 1'b0);
  end

endmodule
