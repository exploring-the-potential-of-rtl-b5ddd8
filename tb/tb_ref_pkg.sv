// tb_ref_pkg -- reference arithmetic for the testbenches, written with
// `real` numbers and independent of the RTL's bit-level functions.
//
// A float code with EB exponent bits and MB fraction bits is read as
//   exponent field 0 : (-1)^s * 2^(1-bias) * f / 2^MB        (subnormal)
//   otherwise        : (-1)^s * 2^(e-bias) * (1 + f / 2^MB)
// with bias = 2^(EB-1) - 1 and no special values.  The largest finite
// code of a format has exponent field 2^EB - 2 and an all-ones fraction.
package tb_ref_pkg;
  import flex8_pkg::*;

  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fmt_real(input logic [31:0] code, input int EB, input int MB);
    int bias, e;
    longint f;
    real v;
    bias = (1 << (EB - 1)) - 1;
    e    = int'((code >> MB) & ((32'd1 << EB) - 1));
    f    = longint'(code & ((32'd1 << MB) - 1));
    if (e == 0) v = pow2(1 - bias) * real'(f) / pow2(MB);
    else        v = pow2(e - bias) * (1.0 + real'(f) / pow2(MB));
    return code[EB+MB] ? -v : v;
  endfunction

  function automatic real fp32_real(input logic [31:0] b);
    return fmt_real(b, 8, 23);
  endfunction

  // FP32 bits of a real, truncated (only used to build stimuli).
  function automatic logic [31:0] real_fp32(input real v);
    logic s;
    int e;
    real a;
    logic [22:0] f;
    s = v < 0.0;
    a = s ? -v : v;
    if (a == 0.0) return {s, 31'd0};
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f = 23'(longint'((a - 1.0) * pow2(23)));
    return {s, 8'(e + 127), f};
  endfunction

  // Exponent and fraction widths of the float input/output formats.
  function automatic void ifmt_em(input ifmt_e f, output int eb, output int mb);
    case (f)
      IF_FP16: begin eb = 5; mb = 10; end
      IF_BF16: begin eb = 8; mb = 7; end
      IF_E5M2: begin eb = 5; mb = 2; end
      IF_E4M3: begin eb = 4; mb = 3; end
      IF_E3M4: begin eb = 3; mb = 4; end
      IF_E2M5: begin eb = 2; mb = 5; end
      IF_E3M2: begin eb = 3; mb = 2; end
      IF_E2M3: begin eb = 2; mb = 3; end
      IF_E2M1: begin eb = 2; mb = 1; end
      default: begin eb = 0; mb = 0; end
    endcase
  endfunction

  function automatic void ofmt_em(input ofmt_e f, output int eb, output int mb);
    case (f)
      OF_FP32: begin eb = 8; mb = 23; end
      OF_FP16: begin eb = 5; mb = 10; end
      OF_BF16: begin eb = 8; mb = 7; end
      OF_E5M2: begin eb = 5; mb = 2; end
      OF_E4M3: begin eb = 4; mb = 3; end
      OF_E3M4: begin eb = 3; mb = 4; end
      OF_E2M5: begin eb = 2; mb = 5; end
      OF_E3M2: begin eb = 3; mb = 2; end
      OF_E2M3: begin eb = 2; mb = 3; end
      OF_E2M1: begin eb = 2; mb = 1; end
      default: begin eb = 0; mb = 0; end
    endcase
  endfunction

  // Real value of a raw input element.
  function automatic real in_real(input ifmt_e f, input logic [15:0] raw);
    int eb, mb;
    if (f == IF_INT8)  return real'($signed(raw[7:0]));
    if (f == IF_UINT8) return real'(raw[7:0]);
    ifmt_em(f, eb, mb);
    return fmt_real({16'd0, raw} & ((32'd1 << (eb + mb + 1)) - 1), eb, mb);
  endfunction

  // Real value of an output code.
  function automatic real out_real(input ofmt_e f, input logic [31:0] code);
    int eb, mb;
    if (f == OF_INT8)  return real'($signed(code[7:0]));
    if (f == OF_UINT8) return real'(code[7:0]);
    ofmt_em(f, eb, mb);
    return fmt_real(code, eb, mb);
  endfunction

  function automatic real rabs(input real v);
    return v < 0.0 ? -v : v;
  endfunction

  // 1 when code is (within tol) the nearest value of format f to t,
  // judged against its neighbour codes, and lies in range.
  function automatic bit out_is_nearest(input ofmt_e f, input logic [31:0] code, input real t,
                                        input real tol);
    int eb, mb, maxmag, m, lo, hi;
    real q, qn;
    logic s;
    q = out_real(f, code);
    if (f == OF_INT8 || f == OF_UINT8) begin
      lo = (f == OF_INT8) ? -127 : 0;
      hi = (f == OF_INT8) ? 127 : 255;
      m  = (f == OF_INT8) ? int'($signed(code[7:0])) : int'(code[7:0]);
      if (m < lo || m > hi) return 0;
      if (m > lo && rabs(real'(m - 1) - t) + tol < rabs(q - t)) return 0;
      if (m < hi && rabs(real'(m + 1) - t) + tol < rabs(q - t)) return 0;
      return 1;
    end
    ofmt_em(f, eb, mb);
    if ((code >> (eb + mb + 1)) != 0) return 0;
    maxmag = (((1 << eb) - 2) << mb) | ((1 << mb) - 1);
    s = code[eb+mb];
    m = int'(code & ((32'd1 << (eb + mb)) - 1));
    if (m > maxmag) return 0;
    if (m > 0) begin
      qn = fmt_real({s, 31'd0} >> (31 - eb - mb) | 32'(m - 1), eb, mb);
      if (rabs(qn - t) + tol < rabs(q - t)) return 0;
    end
    if (m < maxmag) begin
      qn = fmt_real({s, 31'd0} >> (31 - eb - mb) | 32'(m + 1), eb, mb);
      if (rabs(qn - t) + tol < rabs(q - t)) return 0;
    end
    // the opposite sign is never closer unless both are near zero
    if (m > 0 && ((q > 0.0 && t < -tol) || (q < 0.0 && t > tol))) return 0;
    return 1;
  endfunction

endpackage
