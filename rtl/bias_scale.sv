// bias_scale -- adds the FP32 bias to a finished dot product and multiplies
// by the FP32 scale, as in the paper's INT8 and FP8 data-flow figures:
//   y = (acc + bias) * scale
// An INT32 sum is first converted to FP32.  All three steps round to nearest
// even and saturate at the largest finite FP32 value.  The paper gives the
// operations and their order; the rounding is this design's choice.
// Combinational.
module bias_scale
  import flex8_pkg::*;
(
  input  logic [31:0] acc,
  input  logic        acc_is_int,
  input  logic [31:0] bias,
  input  logic [31:0] scale,
  output logic [31:0] y
);

  logic [31:0] acc_fp, biased;

  always_comb begin
    acc_fp = acc_is_int ? int32_to_fp32(acc) : acc;
    biased = fp32_add(acc_fp, bias);
    y      = fp32_mul(biased, scale);
  end

endmodule
