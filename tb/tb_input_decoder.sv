// tb_input_decoder -- checks the decode row: every code of every 8-, 6- and
// 4-bit input format, and random FP16/BF16 codes, must decode into the
// operand class the format belongs to and keep its value exactly.  The
// value of the operand is read back with the float rule of tb_ref_pkg
// (FP19 = E8M10, FP11 = E5M5, FP6 = E3M3) or as sign-magnitude INT9, and
// compared with the value of the raw code.
module tb_input_decoder;
  import flex8_pkg::*;
  import tb_ref_pkg::*;

  ifmt_e       ifmt;
  logic [15:0] raw;
  operand_t    opnd;
  int checks = 0, failures = 0;

  input_decoder dut (.ifmt(ifmt), .raw(raw), .opnd(opnd));

  function automatic real opnd_real(input operand_t o);
    case (o.cls)
      OP_FP19: return fmt_real({13'd0, o.bits}, 8, 10);
      OP_FP11: return fmt_real({21'd0, o.bits[10:0]}, 5, 5);
      OP_FP6:  return fmt_real({25'd0, o.bits[6:0]}, 3, 3);
      default: return o.bits[8] ? -real'(o.bits[7:0]) : real'(o.bits[7:0]);
    endcase
  endfunction

  function automatic opcls_e want_cls(input ifmt_e f);
    case (f)
      IF_FP16, IF_BF16:                   return OP_FP19;
      IF_E5M2, IF_E4M3, IF_E3M4, IF_E2M5: return OP_FP11;
      IF_E3M2, IF_E2M3, IF_E2M1:          return OP_FP6;
      default:                            return OP_INT9;
    endcase
  endfunction

  task automatic check_one(input ifmt_e f, input logic [15:0] r);
    real got, want;
    ifmt = f;
    raw  = r;
    #1;
    got  = opnd_real(opnd);
    want = in_real(f, r);
    checks++;
    if (opnd.cls != want_cls(f) || got != want) begin
      failures++;
      if (failures < 10)
        $display("FAIL: %s raw %h -> cls %0d value %g, expected %g", f.name(), r, opnd.cls, got, want);
    end
  endtask

  initial begin
    for (int f = 0; f <= 10; f++) begin
      if (f == IF_FP16 || f == IF_BF16)
        for (int n = 0; n < 3000; n++) check_one(ifmt_e'(f), 16'($urandom));
      else
        for (int c = 0; c < 256; c++) check_one(ifmt_e'(f), 16'(c));
    end
    // FP16 subnormals and BF16 subnormals explicitly.
    for (int c = 0; c < 1024; c++) begin
      check_one(IF_FP16, 16'(c));
      check_one(IF_FP16, 16'h8000 | 16'(c));
    end
    for (int c = 0; c < 128; c++) check_one(IF_BF16, 16'(c));
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
