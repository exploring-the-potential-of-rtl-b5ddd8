// expmax_shift -- the "expMax and shift" stage of a multiplier stream.
//
// Takes the N sign-magnitude float products of one stream, finds the largest
// product exponent (expmax) and shifts every product right by its distance
// from it, after first giving it G guard bits, so that all terms share one
// binary point and an integer add tree can sum them:
//   term[i] = (-1)^sign[i] * ((mag[i] << G) >> (expmax - exp[i]))
// Bits shifted out below the guard bits are truncated, and a distance of
// PW+G or more gives 0.  Products that are zero take no part in the search
// for expmax, so a zero operand paired with a huge one cannot push the other
// products out.  The paper names this stage only; the guard bits, the
// truncation and the zero rule are this design's choices.  Combinational.
module expmax_shift #(
  parameter int N  = 16,  // products per stream
  parameter int EW = 9,   // exponent width
  parameter int PW = 22,  // product magnitude width
  parameter int G  = 8    // guard bits
) (
  input  logic                 sign   [N],
  input  logic [EW-1:0]        exp    [N],
  input  logic [PW-1:0]        mag    [N],
  output logic [EW-1:0]        expmax,
  output logic signed [PW+G:0] term   [N]
);

  always_comb begin
    expmax = '0;
    for (int i = 0; i < N; i++)
      if (mag[i] != 0 && exp[i] > expmax) expmax = exp[i];
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [EW-1:0]   dst;
      logic [PW+G-1:0] sh;
      dst = expmax - exp[i];
      sh   = (dst >= EW'(PW + G)) ? '0 : ({mag[i], {G{1'b0}}} >> dst);
      term[i] = sign[i] ? -$signed({1'b0, sh}) : $signed({1'b0, sh});
    end
  end

endmodule
