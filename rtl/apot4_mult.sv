// apot4_mult: exact shift-and-add multiplier for 4-bit APoT4 codes, with
// optional super-precision support.
//
// APoT4 ("additive powers of two") writes each magnitude as the sum of one
// value from S1 = {0, 2^-1, 2^-2, 2^-4} and one from S2 = {0, 2^-3}, which
// gives the magnitudes {0,1,2,3,4,6,8,10}/16 (0, 0.1, ..., 1.0 once
// normalized by 10/16). The code is {sign, S1 index[1:0], S2 index}, with
// S1 index 0..3 selecting 0, 2^-1, 2^-2, 2^-4 and S2 index 0..1 selecting
// 0, 2^-3. Code 4'b1000 is then negative zero; with SP = 1 it stands for
// +5/16 = 2^-2 + 2^-4 (0.5 normalized), the super-precision point.
//
// How it works: every operand is at most two powers of two, so the product
// is the sum of at most four powers of two, 2^(i+j) for each pair of
// terms. Each cross term is a one-hot shift, and a small adder tree sums
// them; no multiplier array is needed. The product LSB weighs 2^-8, the
// largest product is (10/16)^2 = 100 units, so 7 magnitude bits plus sign.
//
// Interface: combinational, a and b in, 8-bit two's-complement p out.
// The sets S1, S2 and the tabulated values are the paper's; the bit layout
// of the code and the +SP code point are this design's choices.
module apot4_mult
  import lowbit_pkg::*;
#(
  parameter bit           SP     = 1'b0,
  localparam int unsigned PROD_W = APOT_PROD_MAG_W + 1
) (
  input  logic [3:0]               a,
  input  logic [3:0]               b,
  output logic signed [PROD_W-1:0] p
);

  function automatic apot_op_t decode(logic [3:0] c);
    apot_op_t d;
    d.sign = c[3];
    // S1: 2^-1 = 8/16 (shift 3), 2^-2 = 4/16 (shift 2), 2^-4 = 1/16 (shift 0)
    d.t1_v = (c[2:1] != 2'd0);
    case (c[2:1])
      2'd1:    d.t1_sh = 2'd3;
      2'd2:    d.t1_sh = 2'd2;
      default: d.t1_sh = 2'd0;
    endcase
    // S2: 2^-3 = 2/16 (shift 1)
    d.t2_v  = c[0];
    d.t2_sh = 2'd1;
    if (SP && c == NEG_ZERO_CODE) begin      // +5/16 = 2^-2 + 2^-4
      d.sign  = 1'b0;
      d.t1_v  = 1'b1;
      d.t1_sh = 2'd2;
      d.t2_v  = 1'b1;
      d.t2_sh = 2'd0;
    end
    return d;
  endfunction

  function automatic logic [6:0] xterm(logic va, logic [1:0] sa,
                                       logic vb, logic [1:0] sb);
    return (va && vb) ? (7'd1 << (3'(sa) + 3'(sb))) : 7'd0;
  endfunction

  apot_op_t   da, db;
  logic [6:0] c11, c12, c21, c22;
  logic [8:0] mag_full;
  logic [PROD_W-2:0] mag;

  always_comb begin
    da  = decode(a);
    db  = decode(b);
    c11 = xterm(da.t1_v, da.t1_sh, db.t1_v, db.t1_sh);
    c12 = xterm(da.t1_v, da.t1_sh, db.t2_v, db.t2_sh);
    c21 = xterm(da.t2_v, da.t2_sh, db.t1_v, db.t1_sh);
    c22 = xterm(da.t2_v, da.t2_sh, db.t2_v, db.t2_sh);
    mag_full = 9'(c11) + 9'(c12) + 9'(c21) + 9'(c22);
    mag      = mag_full[PROD_W-2:0];
    p        = (da.sign ^ db.sign) ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

  always_comb assert (mag_full[8:PROD_W-1] == '0)
    else $error("apot4_mult: product %0d exceeds %0d magnitude bits", mag_full, PROD_W-1);

endmodule
