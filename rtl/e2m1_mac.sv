// e2m1_mac: one E2M1 multiply-accumulate unit (base, super-range or
// super-precision), as evaluated in the paper's hardware comparison.
//
// It is an e2m1_mult feeding a mac_accumulator. The multiplier is
// combinational, the accumulator registered, so the unit takes one pair of
// 4-bit codes per cycle and delivers each dot-product sum one cycle after
// its last term (out_valid). The accumulator width follows from the
// variant: 17 bits for E2M1, 18 for +SR and 19 for +SP at DOT_LEN = 256,
// matching the accumulator sizes the paper reports. The sum is an exact
// integer in units of 2^-FRAC (FRAC = 2, or 4 for +SP); per-block scale
// factors are applied outside the unit, as in the paper's evaluation.
module e2m1_mac
  import lowbit_pkg::*;
#(
  parameter supernormal_e VARIANT = SN_NONE,
  parameter int unsigned  DOT_LEN = DOT_LEN_DEFAULT,
  localparam int unsigned PROD_W  = e2m1_prod_mag_w(VARIANT) + 1,
  localparam int unsigned ACC_W   = acc_width(PROD_W - 1, DOT_LEN),
  localparam int unsigned CNT_W   = (DOT_LEN > 1) ? $clog2(DOT_LEN) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic [3:0]              a,
  input  logic [3:0]              b,
  output logic signed [ACC_W-1:0] acc,
  output logic                    out_valid,
  output logic [CNT_W-1:0]        term_cnt
);

  logic signed [PROD_W-1:0] prod;

  e2m1_mult #(.VARIANT(VARIANT)) u_mult (
    .a (a),
    .b (b),
    .p (prod)
  );

  mac_accumulator #(.PROD_W(PROD_W), .DOT_LEN(DOT_LEN), .ACC_W(ACC_W)) u_acc (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_last   (in_last),
    .prod      (prod),
    .acc       (acc),
    .out_valid (out_valid),
    .term_cnt  (term_cnt)
  );

endmodule
