// flex8_pkg -- types, constants and number-system functions shared by the
// flexible 8-bit dot-product unit.
//
// The unit multiplies two vectors whose elements may be FP16, BF16, one of
// four FP8 formats (E5M2, E4M3, E3M4, E2M5), the 6-bit formats E3M2 and E2M3,
// a 4-bit float, INT8 or UINT8, and writes the result as FP32 or as any of
// those formats.  The FP8/FP6 formats follow the paper's own encoding: IEEE
// style bias 2^(E-1)-1, subnormals kept, no infinities and no NaN, and the
// largest finite value uses exponent field 2^E-2 (Table 5).  On decode an
// all-ones exponent field is read as an ordinary normal number, as the
// paper's FP8-to-FP32 listing does.  The 4-bit float is this design's choice
// (E2M1, same rules): the paper names FP4 in its data-flow figure but never
// gives its layout.
//
// Shared operand formats between decoders and multipliers (Fig. 3 names):
//   FP19 = E8M10 (bias 127)  holds FP16 and BF16 exactly
//   FP11 = E5M5  (bias 15)   holds all four FP8 formats exactly
//   FP6  = E3M3  (bias 3)    holds E3M2, E2M3 and the 4-bit E2M1 exactly
//   INT9 = sign + 8-bit magnitude, holds INT8 and UINT8 exactly
// INT9 is sign-magnitude here (a design choice): that is what lets an
// 8-bit x 8-bit unsigned multiplier serve both INT8 and UINT8.
//
// The functions below are plain combinational arithmetic used inside
// always_comb blocks: a generic round-to-nearest-even packer with gradual
// underflow and saturation (no Inf/NaN are ever produced), FP32 add and
// multiply built on it, and float/int conversions.
package flex8_pkg;

  // Input number system (ifmt in Fig. 3).
  typedef enum logic [3:0] {
    IF_FP16  = 4'd0,
    IF_BF16  = 4'd1,
    IF_E5M2  = 4'd2,
    IF_E4M3  = 4'd3,
    IF_E3M4  = 4'd4,
    IF_E2M5  = 4'd5,
    IF_E3M2  = 4'd6,
    IF_E2M3  = 4'd7,
    IF_E2M1  = 4'd8,
    IF_INT8  = 4'd9,
    IF_UINT8 = 4'd10
  } ifmt_e;

  // Output number system (the final MUX of Fig. 3).
  typedef enum logic [3:0] {
    OF_FP32  = 4'd0,
    OF_FP16  = 4'd1,
    OF_BF16  = 4'd2,
    OF_E5M2  = 4'd3,
    OF_E4M3  = 4'd4,
    OF_E3M4  = 4'd5,
    OF_E2M5  = 4'd6,
    OF_E3M2  = 4'd7,
    OF_E2M3  = 4'd8,
    OF_E2M1  = 4'd9,
    OF_INT8  = 4'd10,
    OF_UINT8 = 4'd11
  } ofmt_e;

  // Class of a decoded multiplier operand.
  typedef enum logic [1:0] {
    OP_FP19 = 2'd0,
    OP_FP11 = 2'd1,
    OP_FP6  = 2'd2,
    OP_INT9 = 2'd3
  } opcls_e;

  // Decoded operand.  bits holds, right aligned:
  //   OP_FP19: {s, e[7:0], f[9:0]}   OP_FP11: {s, e[4:0], f[4:0]}
  //   OP_FP6 : {s, e[2:0], f[2:0]}   OP_INT9: {s, mag[7:0]}
  typedef struct packed {
    opcls_e      cls;
    logic [18:0] bits;
  } operand_t;

  localparam int FP19_BIAS = 127;
  localparam int FP11_BIAS = 15;
  localparam int FP6_BIAS  = 3;

  function automatic int opcls_bias(input opcls_e c);
    case (c)
      OP_FP19: return FP19_BIAS;
      OP_FP11: return FP11_BIAS;
      OP_FP6:  return FP6_BIAS;
      default: return 0;
    endcase
  endfunction

  // Index of the most significant set bit, -1 for zero.
  function automatic int msb_index(input logic [63:0] v);
    int p;
    p = -1;
    for (int i = 0; i < 64; i++) if (v[i]) p = i;
    return p;
  endfunction

  // Exact widening of a float (EI exponent bits, MI fraction bits) into a
  // wider one (EO, MO).  Input subnormals become normals where the output
  // range allows, otherwise they stay subnormal.  Result right aligned.
  function automatic logic [18:0] widen_float(input logic s, input logic [7:0] e,
                                              input logic [9:0] f, input int EI,
                                              input int MI, input int EO, input int MO);
    int bi, bo, p, eo;
    logic [9:0] fo;
    bi = (1 << (EI - 1)) - 1;
    bo = (1 << (EO - 1)) - 1;
    eo = 0;
    fo = '0;
    if (e == 0 && f == 0) begin
      eo = 0;
      fo = '0;
    end else if (e != 0) begin
      eo = int'(e) - bi + bo;
      fo = f << (MO - MI);
    end else begin
      p = msb_index(64'(f));
      if (p + 1 - bi - MI + bo >= 1) begin
        eo = p + 1 - bi - MI + bo;
        fo = (f & ~(10'd1 << p)) << (MO - p);
      end else begin
        eo = 0;
        fo = f << (bo - bi + MO - MI);
      end
    end
    return (19'(s) << (EO + MO)) | (19'(eo) << MO) | (19'(fo) & ((19'd1 << MO) - 19'd1));
  endfunction

  // Round (to nearest, ties to even) and pack sign * mag * 2^e into a float
  // with EB exponent bits and MB fraction bits.  sticky_in marks nonzero bits
  // already dropped below mag.  Subnormal results are produced; a result
  // beyond the largest finite value (exponent field 2^EB-2, all-ones
  // fraction) saturates to it.  Result right aligned in 32 bits.
  function automatic logic [31:0] round_pack(input logic sgn, input logic [63:0] mag,
                                             input int e, input int EB, input int MB,
                                             input logic sticky_in);
    int bias, emaxf, p, lsb_e, sh, ef;
    logic [63:0] keep, lowmask;
    logic g, st;
    bias  = (1 << (EB - 1)) - 1;
    emaxf = (1 << EB) - 2;
    if (mag == 0) return 32'(sgn) << (EB + MB);
    p = msb_index(mag);
    lsb_e = p + e - MB;
    if (lsb_e < 1 - bias - MB) lsb_e = 1 - bias - MB;
    sh = lsb_e - e;
    if (sh <= 0) begin
      keep = mag << (-sh);
      g    = 1'b0;
      st   = sticky_in;
    end else if (sh > 64) begin
      keep = '0;
      g    = 1'b0;
      st   = 1'b1;
    end else begin
      keep    = (sh == 64) ? 64'd0 : (mag >> sh);
      g       = mag[sh-1];
      lowmask = (sh == 1) ? 64'd0 : ((64'd1 << (sh - 1)) - 64'd1);
      st      = sticky_in | (|(mag & lowmask));
    end
    if (g && (st || keep[0])) keep = keep + 64'd1;
    if (keep[MB+1]) begin
      keep  = keep >> 1;
      lsb_e = lsb_e + 1;
    end
    ef = keep[MB] ? (lsb_e + MB + bias) : 0;
    if (ef > emaxf) begin
      ef   = emaxf;
      keep = '1;
    end
    return (32'(sgn) << (EB + MB)) | (32'(ef) << MB) | (keep[31:0] & ((32'd1 << MB) - 32'd1));
  endfunction

  // Split a float (EB, MB, right aligned) into sign, integer significand
  // and the exponent of its least significant bit.
  function automatic void fp_unpack(input logic [31:0] bits, input int EB, input int MB,
                                    output logic sgn, output logic [63:0] mag, output int e);
    int bias, ef;
    logic [31:0] f;
    bias = (1 << (EB - 1)) - 1;
    sgn  = bits[EB+MB];
    ef   = int'((bits >> MB) & ((32'd1 << EB) - 32'd1));
    f    = bits & ((32'd1 << MB) - 32'd1);
    if (ef == 0) begin
      mag = 64'(f);
      e   = 1 - bias - MB;
    end else begin
      mag = 64'(f) | (64'd1 << MB);
      e   = ef - bias - MB;
    end
  endfunction

  // FP32 addition, round to nearest even, saturating.
  function automatic logic [31:0] fp32_add(input logic [31:0] a, input logic [31:0] b);
    logic sa, sb, s, st;
    logic [63:0] ma, mb, m, tmag;
    int ea, eb, d, sh, te;
    logic ts;
    fp_unpack(a, 8, 23, sa, ma, ea);
    fp_unpack(b, 8, 23, sb, mb, eb);
    if (ma == 0) return b;
    if (mb == 0) return a;
    if (eb > ea) begin
      ts = sa; sa = sb; sb = ts;
      tmag = ma; ma = mb; mb = tmag;
      te = ea; ea = eb; eb = te;
    end
    // Give the larger operand 30 guard bits, then align the smaller to it.
    ma = ma << 30;
    ea = ea - 30;
    d  = eb - ea;
    if (d >= 0) begin
      mb = mb << d;
    end else begin
      sh = -d;
      if (sh >= 64) begin
        st = |mb;
        mb = '0;
      end else begin
        st = |(mb & ((64'd1 << sh) - 64'd1));
        mb = mb >> sh;
      end
      mb[0] = mb[0] | st;
    end
    if (sa == sb) begin
      m = ma + mb;
      s = sa;
    end else if (ma >= mb) begin
      m = ma - mb;
      s = sa;
    end else begin
      m = mb - ma;
      s = sb;
    end
    if (m == 0) return 32'd0;
    return round_pack(s, m, ea, 8, 23, 1'b0);
  endfunction

  // FP32 multiplication, round to nearest even, saturating.
  function automatic logic [31:0] fp32_mul(input logic [31:0] a, input logic [31:0] b);
    logic sa, sb;
    logic [63:0] ma, mb;
    int ea, eb;
    fp_unpack(a, 8, 23, sa, ma, ea);
    fp_unpack(b, 8, 23, sb, mb, eb);
    return round_pack(sa ^ sb, ma * mb, ea + eb, 8, 23, 1'b0);
  endfunction

  // Two's complement INT32 to FP32, round to nearest even.
  function automatic logic [31:0] int32_to_fp32(input logic [31:0] x);
    logic [63:0] m;
    m = x[31] ? (64'd0 - {{32{1'b1}}, x}) : {32'd0, x};
    return round_pack(x[31], m, 0, 8, 23, 1'b0);
  endfunction

  // FP32 to integer, round to nearest even, clipped to [lo, hi].
  function automatic int fp32_to_int(input logic [31:0] x, input int lo, input int hi);
    logic s, g, st;
    logic [63:0] mag, keep;
    int e, sh;
    longint v;
    fp_unpack(x, 8, 23, s, mag, e);
    if (mag == 0) return 0;
    if (e >= 0) begin
      v = (e > 16) ? longint'(1) << 40 : longint'(mag << e);
    end else begin
      sh = -e;
      if (sh > 62) begin
        v = 0;
      end else begin
        keep = mag >> sh;
        g    = mag[sh-1];
        st   = (sh == 1) ? 1'b0 : |(mag & ((64'd1 << (sh - 1)) - 64'd1));
        if (g && (st || keep[0])) keep = keep + 64'd1;
        v = longint'(keep);
      end
    end
    if (s) v = -v;
    if (v < longint'(lo)) v = longint'(lo);
    if (v > longint'(hi)) v = longint'(hi);
    return int'(v);
  endfunction

endpackage
