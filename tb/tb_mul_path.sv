// tb_mul_path -- checks both multiplier streams (16 lanes of 11x11 and of
// 8x8) end to end: random operand vectors of every class they serve.
// sum * 2^sexp must equal the exact dot product for INT9 and lie within the
// truncation bound of the guard bits for floats (16 terms, each off by less
// than one unit of the aligned grid).  The right stream must give 0 for
// FP19 operands and either stream 0 when disabled.
module tb_mul_path;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 16, G = 8;

  logic en;
  operand_t a [N], b [N];
  logic signed [34:0] sum_l;
  logic signed [28:0] sum_r;
  logic signed [11:0] sexp_l, sexp_r;
  logic [8:0] expmax_l;
  logic [5:0] expmax_r;
  int checks = 0, failures = 0;

  mul_path #(.N(N), .MUL_W(11), .G(G)) dut_l (.en(en), .a(a), .b(b), .sum(sum_l), .sexp(sexp_l), .expmax(expmax_l));
  mul_path #(.N(N), .MUL_W(8),  .G(G)) dut_r (.en(en), .a(a), .b(b), .sum(sum_r), .sexp(sexp_r), .expmax(expmax_r));

  function automatic real opnd_real(input operand_t o);
    case (o.cls)
      OP_FP19: return fmt_real({13'd0, o.bits}, 8, 10);
      OP_FP11: return fmt_real({21'd0, o.bits[10:0]}, 5, 5);
      OP_FP6:  return fmt_real({25'd0, o.bits[6:0]}, 3, 3);
      default: return o.bits[8] ? -real'(o.bits[7:0]) : real'(o.bits[7:0]);
    endcase
  endfunction

  function automatic operand_t rand_opnd(input opcls_e c);
    operand_t o;
    o.cls  = c;
    o.bits = 19'($urandom);
    case (c)
      OP_FP19: o.bits[17:10] = 8'(110 + $urandom_range(0, 30));
      OP_FP11: o.bits = o.bits & 19'h7ff;
      OP_FP6:  o.bits = o.bits & 19'h7f;
      default: o.bits = o.bits & 19'h1ff;
    endcase
    return o;
  endfunction

  task automatic check(input string nm, input real got, input real want, input real tol);
    checks++;
    if ((got > want ? got - want : want - got) > tol) begin
      failures++;
      if (failures < 10) $display("FAIL: %s got %g expected %g tol %g", nm, got, want, tol);
    end
  endtask

  initial begin
    real ref_s, pmax, vl, vr, tl, tr;
    opcls_e c;
    for (int n = 0; n < 4000; n++) begin
      c  = opcls_e'(n % 4);
      en = (n % 17 != 5);
      ref_s = 0.0; pmax = 0.0;
      for (int i = 0; i < N; i++) begin
        a[i] = rand_opnd(c);
        b[i] = rand_opnd(c);
        ref_s += opnd_real(a[i]) * opnd_real(b[i]);
        if (rabs(opnd_real(a[i]) * opnd_real(b[i])) > pmax) pmax = rabs(opnd_real(a[i]) * opnd_real(b[i]));
      end
      #1;
      vl = real'(sum_l) * pow2(int'(sexp_l));
      vr = real'(sum_r) * pow2(int'(sexp_r));
      // one grid unit is 2^-(2*(MUL_W-1)+G) of 2^(expmax-2*bias), at most pmax * 2^-(...-2)
      tl = (c == OP_INT9) ? 0.0 : pmax * pow2(-(20 + G) + 2) * N;
      tr = (c == OP_INT9) ? 0.0 : pmax * pow2(-(14 + G) + 2) * N;
      if (!en) begin
        check("left disabled", vl, 0.0, 0.0);
        check("right disabled", vr, 0.0, 0.0);
      end else begin
        check($sformatf("left cls %0d", c), vl, ref_s, tl);
        if (c == OP_FP19) check("right fp19 idle", vr, 0.0, 0.0);
        else check($sformatf("right cls %0d", c), vr, ref_s, tr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
