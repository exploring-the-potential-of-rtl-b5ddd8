// input_decoder -- the decode row of the flexible-format data path.
//
// One raw 16-bit input element (an activation x or a weight w) is converted,
// by six converters working in parallel, into the multiplier operand formats
// of the paper's data-flow figure, and the ifmt MUX picks one of them:
//   FP16 (E5M10) -> FP19 (E8M10)     BF16 (E8M7)  -> FP19 (E8M10)
//   FP8 (E5M2/E4M3/E3M4/E2M5) -> FP11 (E5M5)
//   FP6 (E3M2/E2M3) and FP4 -> FP6 class (E3M3)
//   INT8 -> INT9                     UINT8 -> INT9
// Every conversion is exact: subnormal inputs are normalised where the wider
// format can hold them as normals and stay subnormal otherwise.  The paper
// gives the converter names and formats; how each is built (widen_float in
// flex8_pkg), the sign-magnitude INT9 layout and the 4-bit format (E2M1)
// are this design's choices.  The figure labels the 6-bit row "FP4 to FP6
// (E3M3)"; here that converter accepts both the paper's FP6 formats and FP4.
//
// Input bits used: FP16/BF16 raw[15:0], 8-bit formats raw[7:0], FP6
// raw[5:0], FP4 raw[3:0].  Purely combinational.
module input_decoder
  import flex8_pkg::*;
(
  input  ifmt_e       ifmt,
  input  logic [15:0] raw,
  output operand_t    opnd
);

  logic [18:0] fp19_fp16, fp19_bf16;
  logic [10:0] fp11;
  logic [6:0]  fp6;
  logic [8:0]  int9_s, int9_u;

  // FP16 (E5M10) and BF16 (E8M7) to FP19 (E8M10).
  always_comb begin
    fp19_fp16 = widen_float(raw[15], {3'b0, raw[14:10]}, raw[9:0], 5, 10, 8, 10);
    fp19_bf16 = widen_float(raw[15], raw[14:7], {3'b0, raw[6:0]}, 8, 7, 8, 10);
  end

  // FP8 to FP11 (E5M5).
  always_comb begin
    unique case (ifmt)
      IF_E5M2: fp11 = 11'(widen_float(raw[7], {3'b0, raw[6:2]}, {8'b0, raw[1:0]}, 5, 2, 5, 5));
      IF_E4M3: fp11 = 11'(widen_float(raw[7], {4'b0, raw[6:3]}, {7'b0, raw[2:0]}, 4, 3, 5, 5));
      IF_E3M4: fp11 = 11'(widen_float(raw[7], {5'b0, raw[6:4]}, {6'b0, raw[3:0]}, 3, 4, 5, 5));
      default: fp11 = 11'(widen_float(raw[7], {6'b0, raw[6:5]}, {5'b0, raw[4:0]}, 2, 5, 5, 5));
    endcase
  end

  // FP6 (E3M2, E2M3) and FP4 (E2M1) to E3M3.
  always_comb begin
    unique case (ifmt)
      IF_E3M2: fp6 = 7'(widen_float(raw[5], {5'b0, raw[4:2]}, {8'b0, raw[1:0]}, 3, 2, 3, 3));
      IF_E2M3: fp6 = 7'(widen_float(raw[5], {6'b0, raw[4:3]}, {7'b0, raw[2:0]}, 2, 3, 3, 3));
      default: fp6 = 7'(widen_float(raw[3], {6'b0, raw[2:1]}, {9'b0, raw[0]}, 2, 1, 3, 3));
    endcase
  end

  // INT8 and UINT8 to sign-magnitude INT9.
  always_comb begin
    int9_s = {raw[7], raw[7] ? (8'd0 - raw[7:0]) : raw[7:0]};
    int9_u = {1'b0, raw[7:0]};
  end

  // ifmt MUX.
  always_comb begin
    opnd = '{cls: OP_INT9, bits: '0};
    unique case (ifmt)
      IF_FP16:                            opnd = '{cls: OP_FP19, bits: fp19_fp16};
      IF_BF16:                            opnd = '{cls: OP_FP19, bits: fp19_bf16};
      IF_E5M2, IF_E4M3, IF_E3M4, IF_E2M5: opnd = '{cls: OP_FP11, bits: {8'b0, fp11}};
      IF_E3M2, IF_E2M3, IF_E2M1:          opnd = '{cls: OP_FP6,  bits: {12'b0, fp6}};
      IF_INT8:                            opnd = '{cls: OP_INT9, bits: {10'b0, int9_s}};
      default:                            opnd = '{cls: OP_INT9, bits: {10'b0, int9_u}};
    endcase
  end

endmodule
