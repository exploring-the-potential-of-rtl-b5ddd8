// mul11_lane -- one multiplier of the left stream (the "11bit x 11bit"
// group of the paper's data-flow figure).
//
// Both operands must be of the same class (FP19, FP11, FP6 or INT9); mixing
// INT and FP in one product is not supported, as in the paper.  For a float
// the 11-bit significand is {hidden bit, fraction} left aligned, so an FP19
// fills it and FP11/FP6 fractions are padded with zeros below; the biased
// exponents, read as 1 for a subnormal, are added.  For INT9 the two 8-bit
// magnitudes are multiplied and the exponent is 0.  The product is
// sign-magnitude:
//   float:  value = (-1)^sign * mag * 2^(exp - 2*bias - 20)
//   INT9:   value = (-1)^sign * mag
// How the significands are aligned in the multiplier is this design's
// choice; the paper gives the 11x11 multiplier size and which formats use
// it.  Purely combinational.
module mul11_lane
  import flex8_pkg::*;
(
  input  operand_t    a,
  input  operand_t    b,
  output logic        sign,
  output logic [8:0]  exp,
  output logic [21:0] mag
);

  // Significand and effective biased exponent of one operand.
  function automatic void split(input operand_t o, output logic s, output logic [10:0] m,
                                output logic [7:0] e);
    unique case (o.cls)
      OP_FP19: begin
        s = o.bits[18];
        m = {o.bits[17:10] != 0, o.bits[9:0]};
        e = (o.bits[17:10] == 0) ? 8'd1 : o.bits[17:10];
      end
      OP_FP11: begin
        s = o.bits[10];
        m = {o.bits[9:5] != 0, o.bits[4:0], 5'b0};
        e = (o.bits[9:5] == 0) ? 8'd1 : {3'b0, o.bits[9:5]};
      end
      OP_FP6: begin
        s = o.bits[6];
        m = {o.bits[5:3] != 0, o.bits[2:0], 7'b0};
        e = (o.bits[5:3] == 0) ? 8'd1 : {5'b0, o.bits[5:3]};
      end
      default: begin
        s = o.bits[8];
        m = {3'b0, o.bits[7:0]};
        e = 8'd0;
      end
    endcase
  endfunction

  logic        sa, sb;
  logic [10:0] ma, mb;
  logic [7:0]  ea, eb;

  always_comb begin
    split(a, sa, ma, ea);
    split(b, sb, mb, eb);
    sign = sa ^ sb;
    exp  = {1'b0, ea} + {1'b0, eb};
    mag  = ma * mb;
  end

endmodule
