// lowbit_pkg: types and width rules shared by the 4-bit MAC units.
//
// The MAC units multiply two 4-bit codes exactly and accumulate the
// products as plain two's-complement integers, so no rounding happens
// anywhere in the datapath. Each format therefore has a fixed "product
// unit" (the weight of the product LSB) and a product magnitude width; the
// accumulator width follows as
//
//     ACC_W = product magnitude bits + clog2(DOT_LEN) + 1 sign bit.
//
// With DOT_LEN = 256 this rule gives 17 (E2M1), 18 (E2M1+SR), 19 (E2M1+SP)
// and 16 (APoT4, APoT4+SP) bits, the accumulator sizes the paper reports for
// its synthesized MAC units. The rule itself (lossless integer/fixed-point
// accumulation of 256 terms) is the paper's; the derivation of the product
// widths from the code layout is this design's.
package lowbit_pkg;

  // Number of products summed by one MAC before its result is delivered.
  localparam int unsigned DOT_LEN_DEFAULT = 256;

  // Supernormal variant of E2M1: the code 4'b1000 (negative zero) is
  // reassigned to +8.0 (super-range) or +5.0 (super-precision).
  typedef enum logic [1:0] {
    SN_NONE = 2'd0,
    SN_SR   = 2'd1,
    SN_SP   = 2'd2
  } supernormal_e;

  // Formats selectable at the top level.
  typedef enum logic [2:0] {
    FMT_E2M1    = 3'd0,
    FMT_E2M1_SR = 3'd1,
    FMT_E2M1_SP = 3'd2,
    FMT_APOT4   = 3'd3,
    FMT_APOT4_SP = 3'd4
  } fmt_e;

  localparam logic [3:0] NEG_ZERO_CODE = 4'b1000;

  // An E2M1 operand after decoding: value = sig * 2^lsh * 2^-F, with F the
  // mantissa fraction bits of the variant (1, or 2 for super-precision).
  typedef struct packed {
    logic       sign;
    logic [2:0] sig;   // significand with hidden bit, F fraction bits
    logic [1:0] lsh;   // left shift: max(exponent, 1) - 1, or 3 for +8.0
  } e2m1_op_t;

  // An APoT4 operand after decoding: magnitude = sum of up to two powers
  // of two, each given by a valid bit and a shift, in units of 2^-4.
  typedef struct packed {
    logic       sign;
    logic       t1_v;
    logic [1:0] t1_sh;
    logic       t2_v;
    logic [1:0] t2_sh;
  } apot_op_t;

  // Mantissa fraction bits used internally by the E2M1 multiplier. The
  // super-precision value 5.0 = 1.01b x 2^2 needs a second mantissa bit.
  function automatic int unsigned e2m1_man_bits(supernormal_e v);
    return (v == SN_SP) ? 2 : 1;
  endfunction

  // Fraction bits of an E2M1 product (LSB weight 2^-frac).
  function automatic int unsigned e2m1_prod_frac(supernormal_e v);
    return 2 * e2m1_man_bits(v);
  endfunction

  // Magnitude bits of the largest E2M1 product:
  //   base: 6*6   = 36 -> 144 quarter units  -> 8 bits
  //   SR  : 8*8   = 64 -> 256 quarter units  -> 9 bits
  //   SP  : 6*6   = 36 -> 576 1/16 units     -> 10 bits
  function automatic int unsigned e2m1_prod_mag_w(supernormal_e v);
    case (v)
      SN_SR:   return 9;
      SN_SP:   return 10;
      default: return 8;
    endcase
  endfunction

  // APoT4 magnitudes are sums of two powers of two in units of 2^-4, the
  // largest being 10/16; the largest product is 100 units of 2^-8: 7 bits.
  localparam int unsigned APOT_PROD_FRAC  = 8;
  localparam int unsigned APOT_PROD_MAG_W = 7;

  function automatic int unsigned acc_width(int unsigned prod_mag_w,
                                            int unsigned dot_len);
    return prod_mag_w + $clog2(dot_len) + 1;
  endfunction

endpackage
