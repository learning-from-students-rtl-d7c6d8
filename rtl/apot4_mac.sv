// apot4_mac: one APoT4 multiply-accumulate unit, with optional
// super-precision code, as evaluated in the paper's hardware comparison.
//
// It is an apot4_mult (shift-and-add over at most four power-of-two cross
// terms) feeding a mac_accumulator. One pair of 4-bit codes per cycle;
// each dot-product sum appears one cycle after its last term (out_valid).
// The sum is an exact integer in units of 2^-8; the accumulator is 16 bits
// at DOT_LEN = 256 for both APoT4 and APoT4+SP, matching the paper, since
// the extra super-precision value (5/16) does not raise the largest
// product (10/16 x 10/16).
module apot4_mac
  import lowbit_pkg::*;
#(
  parameter bit           SP      = 1'b0,
  parameter int unsigned  DOT_LEN = DOT_LEN_DEFAULT,
  localparam int unsigned PROD_W  = APOT_PROD_MAG_W + 1,
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

  apot4_mult #(.SP(SP)) u_mult (
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
