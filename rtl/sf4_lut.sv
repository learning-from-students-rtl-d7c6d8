// sf4_lut: Student Float (SF4) lookup decoder with block-scale multiply,
// for weight-only quantization.
//
// SF4 is a 4-bit lookup format: its 16 values are quantiles of a Student's
// t-distribution with nu degrees of freedom, picked so that each code gets
// the same share of probability mass, with code 7 fixed to an exact zero
// and eight positive codes (8..15) against seven negative ones. The values
// are normalized to [-1, 1]. Code i (0..15) stands for the i-th smallest
// value. This module stores the tabulated values for nu = 3..6 (nu = 5 is
// the format the paper settles on) to three decimals, as fixed-point
// Q2.14 numbers (1.0 = 16384): round(v * 16384), v in thousandths.
//
// Weight-only quantization multiplies each decoded value by a per-block
// scale factor. Here the scale is a signed fixed-point number of SCALE_W
// bits with an implied binary point of the user's choosing, and deq is the
// exact product value(code) * scale, whose LSB weighs 2^-14 times the
// scale LSB. The whole path is combinational.
//
// From the paper: the derivation, the code order and the values. This
// design's choices: Q2.14 storage and the fixed-point scale format (the
// paper only calls the scales "high-precision").
module sf4_lut #(
  parameter int unsigned  NU      = 5,
  parameter int unsigned  SCALE_W = 16,
  localparam int unsigned VAL_W   = 16,
  localparam int unsigned DEQ_W   = VAL_W + SCALE_W
) (
  input  logic [3:0]                code,
  input  logic signed [SCALE_W-1:0] scale,
  output logic signed [VAL_W-1:0]   value,
  output logic signed [DEQ_W-1:0]   deq
);

  typedef logic signed [VAL_W-1:0] table_t [16];

  // Tabulated SF4 values in thousandths, codes 0..15.
  function automatic int thou(int unsigned nu, int unsigned i);
    int t3 [16] = '{-1000, -576, -404, -292, -205, -131, -64, 0,
                      56,  114,  176,  246,  330,  439,  606, 1000};
    int t4 [16] = '{-1000, -609, -436, -318, -225, -145, -71, 0,
                      62,  126,  194,  270,  359,  472,  638, 1000};
    int t5 [16] = '{-1000, -628, -455, -334, -237, -153, -75, 0,
                      66,  133,  205,  284,  376,  491,  657, 1000};
    int t6 [16] = '{-1000, -640, -467, -345, -246, -158, -78, 0,
                      68,  138,  212,  293,  387,  504,  669, 1000};
    case (nu)
      3:       return t3[i];
      4:       return t4[i];
      6:       return t6[i];
      default: return t5[i];
    endcase
  endfunction

  function automatic table_t build_table(int unsigned nu);
    table_t tab;
    for (int unsigned i = 0; i < 16; i++) begin
      int t = thou(nu, i);
      int q = (t * 16384 + ((t < 0) ? -500 : 500)) / 1000;
      tab[i] = VAL_W'(q);
    end
    return tab;
  endfunction

  localparam table_t TABLE = build_table(NU);

  always_comb begin
    value = TABLE[code];
    deq   = DEQ_W'(value) * DEQ_W'(scale);
  end

  initial assert (NU >= 3 && NU <= 6)
    else $error("sf4_lut: values are tabulated for NU = 3..6 only");

endmodule
