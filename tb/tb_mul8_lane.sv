// tb_mul8_lane -- checks the multiplier lane against exact products.  Random
// operand pairs of each class are multiplied; the product the lane reports,
//   float: (-1)^sign * mag * 2^(exp - 2*bias - 14),  INT9: (-1)^sign * mag
// must equal the product of the two operand values worked out with reals.
// FP19 operands, which this stream does not serve, must give a zero product.
module tb_mul8_lane;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  operand_t a, b;
  logic sign;
  logic [5:0] exp;
  logic [15:0] mag;
  int checks = 0, failures = 0;

  mul8_lane dut (.a(a), .b(b), .sign(sign), .exp(exp), .mag(mag));

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
      OP_FP11: o.bits = o.bits & 19'h7ff;
      OP_FP6:  o.bits = o.bits & 19'h7f;
      OP_INT9: o.bits = o.bits & 19'h1ff;
      default: ;
    endcase
    // exponent field 0 now and then
    if ($urandom_range(0, 4) == 0)
      case (c)
        OP_FP19: o.bits[17:10] = '0;
        OP_FP11: o.bits[9:5]   = '0;
        OP_FP6:  o.bits[5:3]   = '0;
        default: ;
      endcase
    return o;
  endfunction

  opcls_e cls_list [4] = '{OP_FP11, OP_FP6, OP_INT9, OP_FP19};

  initial begin
    real got, want;
    for (int n = 0; n < 20000; n++) begin
      opcls_e c;
      c = cls_list[n % 4];
      a = rand_opnd(c);
      b = rand_opnd(c);
      #1;
      if (c == OP_INT9) got = real'(mag);
      else got = real'(mag) * pow2(int'(exp) - 2 * opcls_bias(c) - 14);
      if (sign) got = -got;
      want = (c == OP_FP19) ? 0.0 : opnd_real(a) * opnd_real(b);
      checks++;
      if (got != want) begin
        failures++;
        if (failures < 10) $display("FAIL: cls %0d a %h b %h -> %g expected %g", c, a.bits, b.bits, got, want);
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
