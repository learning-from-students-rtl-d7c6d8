// e2m1_mult: exact multiplier for 4-bit E2M1 codes, with optional
// supernormal support.
//
// An E2M1 code is {sign, exponent[1:0], mantissa}. Exponent 0 is subnormal
// (0.m), exponents 1..3 are normal (1.m x 2^(e-1)), which gives the
// magnitudes 0, 0.5, 1, 1.5, 2, 3, 4, 6. The sign bit makes code 4'b1000 a
// redundant negative zero. The two supernormal variants give that code a
// value of its own:
//   SN_SR (super-range)     4'b1000 = +8.0  (one point beyond the range)
//   SN_SP (super-precision) 4'b1000 = +5.0  (one point between 4 and 6)
// These values are the ones tabulated in the paper; the choice of code
// 4'b1000 follows from the paper's "reassigns negative zero".
//
// How it works: each operand is decoded to (sign, significand, shift) so
// that value = sig * 2^lsh * 2^-F, where F is 1, or 2 for super-precision
// because 5.0 = 1.01b x 2^2 needs a second mantissa bit. The product is the
// integer sig_a*sig_b shifted left by lsh_a+lsh_b, negated when the signs
// differ. Its LSB weighs 2^-2F, so the output is exact and the downstream
// accumulator can add it without rounding.
//
// Interface: purely combinational, a and b in, p out. PROD_W is 9 (base),
// 10 (SR) or 11 (SP) bits, two's complement. The decoder layout and the
// product fixed-point scaling are this design's choices; the paper gives
// the values each code stands for and the lossless accumulation rule.
module e2m1_mult
  import lowbit_pkg::*;
#(
  parameter supernormal_e VARIANT = SN_NONE,
  localparam int unsigned PROD_W  = e2m1_prod_mag_w(VARIANT) + 1
) (
  input  logic [3:0]               a,
  input  logic [3:0]               b,
  output logic signed [PROD_W-1:0] p
);

  localparam int unsigned F = e2m1_man_bits(VARIANT);

  function automatic e2m1_op_t decode(logic [3:0] c);
    e2m1_op_t   d;
    logic [1:0] e;
    logic       hid;
    e   = c[2:1];
    hid = (e != 2'd0);
    d.sign = c[3];
    d.lsh   = (e == 2'd0) ? 2'd0 : e - 2'd1;
    d.sig  = (F == 2) ? {hid, c[0], 1'b0} : {1'b0, hid, c[0]};
    if (c == NEG_ZERO_CODE) begin
      case (VARIANT)
        SN_SR: begin d.sign = 1'b0; d.sig = 3'b010; d.lsh = 2'd3; end  // 1.0b x 2^3 = 8
        SN_SP: begin d.sign = 1'b0; d.sig = 3'b101; d.lsh = 2'd2; end  // 1.01b x 2^2 = 5
        default: ;                                                   // -0 stays zero
      endcase
    end
    return d;
  endfunction

  e2m1_op_t    da, db;
  logic [5:0]  sig_prod;
  logic [2:0]  sh_sum;
  logic [11:0] mag_full;
  logic [PROD_W-2:0] mag;

  always_comb begin
    da       = decode(a);
    db       = decode(b);
    sig_prod = 6'(da.sig) * 6'(db.sig);
    sh_sum   = 3'(da.lsh) + 3'(db.lsh);
    mag_full = 12'(sig_prod) << sh_sum;
    mag      = mag_full[PROD_W-2:0];
    p        = (da.sign ^ db.sign) ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

  // The largest product must fit the declared width (lossless by design).
  always_comb assert (mag_full[11:PROD_W-1] == '0)
    else $error("e2m1_mult: product %0d exceeds %0d magnitude bits", mag_full, PROD_W-1);

endmodule
