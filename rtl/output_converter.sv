// output_converter -- the output row of the flexible-format data path: six
// converters from FP32 (to FP16, BF16, FP8, FP4/FP6, INT8, UINT8), the
// FP32 bypass, and the MUX that picks the output number system.
//
// Float outputs round to nearest, ties to even, keep subnormals, and
// saturate to the largest finite value; the paper's own 8- and 6-bit
// formats have no Inf or NaN, and this design saturates FP16 and BF16 the
// same way.  The paper's listing comments that FP32 is rounded "to nearest";
// the code line under it rounds up, and the comment is followed here.
// INT8 rounds to nearest even and clips symmetrically to [-127, 127]
// (symmetric per-tensor quantisation); UINT8 clips to [0, 255].  The 4-bit
// output is E2M1, this design's choice.  The result is right aligned in
// out, upper bits zero.  Combinational.
module output_converter
  import flex8_pkg::*;
(
  input  logic [31:0] x,
  input  ofmt_e       ofmt,
  output logic [31:0] out
);

  logic [31:0] c_fp16, c_bf16, c_fp8, c_fp46;
  logic [7:0]  c_int8, c_uint8;
  logic        s;
  logic [63:0] m;
  int          e;

  always_comb begin
    fp_unpack(x, 8, 23, s, m, e);
    c_fp16 = round_pack(s, m, e, 5, 10, 1'b0);
    c_bf16 = round_pack(s, m, e, 8, 7, 1'b0);
    unique case (ofmt)
      OF_E5M2: c_fp8 = round_pack(s, m, e, 5, 2, 1'b0);
      OF_E4M3: c_fp8 = round_pack(s, m, e, 4, 3, 1'b0);
      OF_E3M4: c_fp8 = round_pack(s, m, e, 3, 4, 1'b0);
      default: c_fp8 = round_pack(s, m, e, 2, 5, 1'b0);
    endcase
    unique case (ofmt)
      OF_E3M2: c_fp46 = round_pack(s, m, e, 3, 2, 1'b0);
      OF_E2M3: c_fp46 = round_pack(s, m, e, 2, 3, 1'b0);
      default: c_fp46 = round_pack(s, m, e, 2, 1, 1'b0);
    endcase
    c_int8  = 8'(fp32_to_int(x, -127, 127));
    c_uint8 = 8'(fp32_to_int(x, 0, 255));
  end

  always_comb begin
    unique case (ofmt)
      OF_FP32:                            out = x;
      OF_FP16:                            out = c_fp16;
      OF_BF16:                            out = c_bf16;
      OF_E5M2, OF_E4M3, OF_E3M4, OF_E2M5: out = c_fp8;
      OF_E3M2, OF_E2M3, OF_E2M1:          out = c_fp46;
      OF_INT8:                            out = {24'd0, c_int8};
      default:                            out = {24'd0, c_uint8};
    endcase
  end

endmodule
