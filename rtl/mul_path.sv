// mul_path -- one of the two multiplier streams of the flexible-format
// data path: a group of N multipliers, the MUX that separates float from
// integer products, "expMax and shift" for float products, the MUX in front
// of the add tree, and the add tree.
//
// MUL_W = 11 builds the left stream (11x11 multipliers, serves FP19, FP11,
// FP6 and INT9); MUL_W = 8 the right stream (8x8 multipliers, serves FP11,
// FP6 and INT9).  All N operand pairs of one cycle share one class, taken
// from a[0].  With en low, or with FP19 operands on the right stream, the
// stream is idle and its sum is 0 (the paper's "leisure" stream).
//
// Output: a signed sum and a binary exponent, value = sum * 2^sexp.  For
// INT9 the products skip the alignment and sexp is 0, so sum is the exact
// integer dot product of the N pairs.  For floats
//   sexp = expmax - 2*bias - 2*(MUL_W-1) - G.
// Combinational.
module mul_path
  import flex8_pkg::*;
#(
  parameter int N     = 16,
  parameter int MUL_W = 11,
  parameter int G     = 8,
  localparam int PW   = 2 * MUL_W,
  localparam int EW   = (MUL_W == 11) ? 9 : 6,
  localparam int TW   = PW + G + 1,
  localparam int SW   = TW + $clog2(N)
) (
  input  logic                 en,
  input  operand_t             a [N],
  input  operand_t             b [N],
  output logic signed [SW-1:0] sum,
  output logic signed [11:0]   sexp,
  output logic [EW-1:0]        expmax
);

  logic          p_sign [N];
  logic [EW-1:0] p_exp  [N];
  logic [PW-1:0] p_mag  [N];

  opcls_e cls;
  logic   is_int, active;
  assign cls    = a[0].cls;
  assign is_int = (cls == OP_INT9);
  assign active = en && !(MUL_W != 11 && cls == OP_FP19);

  // Multiplier group.
  for (genvar i = 0; i < N; i++) begin : g_lane
    if (MUL_W == 11) begin : g_m11
      mul11_lane u_mul (.a(a[i]), .b(b[i]), .sign(p_sign[i]), .exp(p_exp[i]), .mag(p_mag[i]));
    end else begin : g_m8
      mul8_lane u_mul (.a(a[i]), .b(b[i]), .sign(p_sign[i]), .exp(p_exp[i]), .mag(p_mag[i]));
    end
  end

  // First MUX: float products to the aligner, integer products around it.
  logic          f_sign [N];
  logic [EW-1:0] f_exp  [N];
  logic [PW-1:0] f_mag  [N];
  logic signed [TW-1:0] f_term [N];
  logic signed [TW-1:0] t_in   [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      f_sign[i] = p_sign[i];
      f_exp[i]  = p_exp[i];
      f_mag[i]  = (active && !is_int) ? p_mag[i] : '0;
    end
  end

  expmax_shift #(.N(N), .EW(EW), .PW(PW), .G(G)) u_align (
    .sign(f_sign), .exp(f_exp), .mag(f_mag), .expmax(expmax), .term(f_term)
  );

  // Second MUX: aligned float terms or signed integer products.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (!active)     t_in[i] = '0;
      else if (is_int) t_in[i] = p_sign[i] ? -TW'($signed({1'b0, p_mag[i]})) : TW'($signed({1'b0, p_mag[i]}));
      else             t_in[i] = f_term[i];
    end
  end

  add_tree #(.N(N), .W(TW)) u_tree (.term(t_in), .sum(sum));

  always_comb begin
    if (!active || is_int) sexp = '0;
    else sexp = 12'(int'(expmax) - 2 * opcls_bias(cls) - 2 * (MUL_W - 1) - G);
  end

endmodule
