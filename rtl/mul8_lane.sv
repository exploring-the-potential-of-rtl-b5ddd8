// mul8_lane -- one multiplier of the right stream (the "8bit x 8bit" group
// of the paper's data-flow figure).
//
// Serves the operand classes that fit an 8-bit significand: FP11 (all FP8
// formats), FP6 (FP6/FP4) and INT9 (INT8/UINT8).  FP19 (FP16/BF16) is not
// supported on this stream; the paper runs those on the left stream only,
// and the enclosing stream gates this lane off for them.  Float
// significands are {hidden bit, fraction} left aligned in 8 bits, and the
// exponent adder is the paper's 5-bit adder (6-bit sum):
//   float:  value = (-1)^sign * mag * 2^(exp - 2*bias - 14)
//   INT9:   value = (-1)^sign * mag
// The significand alignment is this design's choice.  Purely combinational.
module mul8_lane
  import flex8_pkg::*;
(
  input  operand_t    a,
  input  operand_t    b,
  output logic        sign,
  output logic [5:0]  exp,
  output logic [15:0] mag
);

  function automatic void split(input operand_t o, output logic s, output logic [7:0] m,
                                output logic [4:0] e);
    unique case (o.cls)
      OP_FP11: begin
        s = o.bits[10];
        m = {o.bits[9:5] != 0, o.bits[4:0], 2'b0};
        e = (o.bits[9:5] == 0) ? 5'd1 : o.bits[9:5];
      end
      OP_FP6: begin
        s = o.bits[6];
        m = {o.bits[5:3] != 0, o.bits[2:0], 4'b0};
        e = (o.bits[5:3] == 0) ? 5'd1 : {2'b0, o.bits[5:3]};
      end
      OP_INT9: begin
        s = o.bits[8];
        m = o.bits[7:0];
        e = 5'd0;
      end
      default: begin  // FP19 is not served by this stream
        s = 1'b0;
        m = 8'd0;
        e = 5'd0;
      end
    endcase
  endfunction

  logic       sa, sb;
  logic [7:0] ma, mb;
  logic [4:0] ea, eb;

  always_comb begin
    split(a, sa, ma, ea);
    split(b, sb, mb, eb);
    sign = sa ^ sb;
    exp  = {1'b0, ea} + {1'b0, eb};
    mag  = ma * mb;
  end

endmodule
