// add_tree -- binary adder tree summing the N signed terms of one stream.
//
// N is padded with zero terms to the next power of two; level l adds pairs
// of level l-1, so the depth is clog2(N) adders.  The result is
// W + clog2(N) bits wide and never overflows.  The paper names the add tree
// in each stream; its width and structure are this design's choices.
// Combinational.
module add_tree #(
  parameter int N = 16,
  parameter int W = 31
) (
  input  logic signed [W-1:0]          term [N],
  output logic signed [W+$clog2(N)-1:0] sum
);

  localparam int L  = $clog2(N);
  localparam int NP = 1 << L;
  localparam int SW = W + L;

  logic signed [SW-1:0] lvl [L+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++)
      lvl[0][i] = (i < N) ? SW'(term[i]) : '0;
    for (int l = 1; l <= L; l++)
      for (int i = 0; i < NP; i++)
        if (i < (NP >> l)) lvl[l][i] = lvl[l-1][2*i] + lvl[l-1][2*i+1];
        else               lvl[l][i] = '0;
    sum = lvl[L][0];
  end

endmodule
