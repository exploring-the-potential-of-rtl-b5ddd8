// flex8_dot_unit -- flexible-format dot-product unit (top level).
//
// Computes y = (sum_k x[k] * w[k] + bias) * scale over a vector delivered
// in beats, with x and w in any one of FP16, BF16, E5M2, E4M3, E3M4, E2M5,
// E3M2, E2M3, E2M1 (FP4), INT8 or UINT8, and y in FP32 or any of those.
// Data path, after the paper's data-flow figure:
//   input_decoder (x2 per element) -> two multiplier streams (mul_path):
//     left  = LANES 11x11 multipliers, right = LANES 8x8 multipliers,
//     each with expMax-and-shift and an add tree
//   -> path_combine (INT32 or FP32) -> psum register -> accumulator
//   -> bias_scale -> output_converter -> out register
// A beat holds 2*LANES element pairs.  For 8-, 6- and 4-bit formats all
// of them are used: pairs 0..LANES-1 go to the left stream and
// LANES..2*LANES-1 to the right, so a beat does 2*LANES multiplies.  For
// FP16/BF16 only pairs 0..LANES-1 are used (left stream) and the right
// stream is idle, so these formats run at half the multiply rate.
//
// Interface: in_valid/in_first/in_last frame one dot product, one beat per
// clock, no back-pressure.  ifmt must stay the same within a dot product;
// ofmt, bias and scale are taken with the beat that has in_last set.
// Timing: out_valid is high for one cycle, 3 clock edges after the edge
// that took the last beat; out_data holds the result right aligned.
// The beat framing, the pipeline registers and LANES = 16 are this
// design's choices; the paper gives neither a lane count nor a latency.
module flex8_dot_unit
  import flex8_pkg::*;
#(
  parameter int LANES = 16,  // multipliers per stream
  parameter int G     = 8    // guard bits in expMax-and-shift
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_first,
  input  logic        in_last,
  input  ifmt_e       ifmt,
  input  ofmt_e       ofmt,
  input  logic [15:0] x [2*LANES],
  input  logic [15:0] w [2*LANES],
  input  logic [31:0] bias,
  input  logic [31:0] scale,
  output logic        out_valid,
  output logic [31:0] out_data
);

  localparam int SWL = 2 * 11 + G + 1 + $clog2(LANES);
  localparam int SWR = 2 * 8 + G + 1 + $clog2(LANES);

  // Decode.
  operand_t xa [2*LANES];
  operand_t wa [2*LANES];
  operand_t xl [LANES], wl [LANES], xr [LANES], wr [LANES];

  for (genvar k = 0; k < 2 * LANES; k++) begin : g_dec
    input_decoder u_dx (.ifmt(ifmt), .raw(x[k]), .opnd(xa[k]));
    input_decoder u_dw (.ifmt(ifmt), .raw(w[k]), .opnd(wa[k]));
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      xl[i] = xa[i];
      wl[i] = wa[i];
      xr[i] = xa[LANES+i];
      wr[i] = wa[LANES+i];
    end
  end

  // Two multiplier streams.
  logic signed [SWL-1:0] sum_l;
  logic signed [SWR-1:0] sum_r;
  logic signed [11:0]    sexp_l, sexp_r;
  logic [8:0]            expmax_l;
  logic [5:0]            expmax_r;
  logic                  is_fp16;
  logic                  is_int;

  assign is_fp16 = (ifmt == IF_FP16) || (ifmt == IF_BF16);
  assign is_int  = (ifmt == IF_INT8) || (ifmt == IF_UINT8);

  mul_path #(.N(LANES), .MUL_W(11), .G(G)) u_left (
    .en(1'b1), .a(xl), .b(wl), .sum(sum_l), .sexp(sexp_l), .expmax(expmax_l)
  );
  mul_path #(.N(LANES), .MUL_W(8), .G(G)) u_right (
    .en(!is_fp16), .a(xr), .b(wr), .sum(sum_r), .sexp(sexp_r), .expmax(expmax_r)
  );

  // Join the streams.
  logic [31:0] pword;
  path_combine #(.SWL(SWL), .SWR(SWR)) u_comb (
    .is_int(is_int), .sum_l(sum_l), .sexp_l(sexp_l), .sum_r(sum_r), .sexp_r(sexp_r),
    .word(pword)
  );

  // psum register (the "FP32" register of the figure) with the beat's framing.
  logic        p_valid, p_first, p_last, p_is_int;
  logic [31:0] p_word;
  ofmt_e       p_ofmt;
  logic [31:0] p_bias, p_scale;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid  <= 1'b0;
      p_first  <= 1'b0;
      p_last   <= 1'b0;
      p_is_int <= 1'b0;
      p_word   <= '0;
      p_ofmt   <= OF_FP32;
      p_bias   <= '0;
      p_scale  <= '0;
    end else begin
      p_valid <= in_valid;
      if (in_valid) begin
        p_first  <= in_first;
        p_last   <= in_last;
        p_is_int <= is_int;
        p_word   <= pword;
        if (in_last) begin
          p_ofmt  <= ofmt;
          p_bias  <= bias;
          p_scale <= scale;
        end
      end
    end
  end

  // Accumulate.
  logic [31:0] acc;
  logic        acc_is_int, acc_done;
  ofmt_e       a_ofmt;
  logic [31:0] a_bias, a_scale;

  accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .in_valid(p_valid), .in_first(p_first), .in_last(p_last),
    .in_is_int(p_is_int), .in_word(p_word), .acc(acc), .acc_is_int(acc_is_int), .done(acc_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_ofmt  <= OF_FP32;
      a_bias  <= '0;
      a_scale <= '0;
    end else if (p_valid && p_last) begin
      a_ofmt  <= p_ofmt;
      a_bias  <= p_bias;
      a_scale <= p_scale;
    end
  end

  // Bias, scale, output number system.
  logic [31:0] y, yconv;

  bias_scale u_bs (.acc(acc), .acc_is_int(acc_is_int), .bias(a_bias), .scale(a_scale), .y(y));
  output_converter u_out (.x(y), .ofmt(a_ofmt), .out(yconv));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= acc_done;
      if (acc_done) out_data <= yconv;
    end
  end

  // ifmt may not change inside one dot product.
  ifmt_e ifmt_q;
  always_ff @(posedge clk) if (in_valid) ifmt_q <= ifmt;
  a_ifmt_stable: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_first |-> ifmt == ifmt_q);

endmodule
