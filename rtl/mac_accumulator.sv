// mac_accumulator: lossless two's-complement accumulator for one MAC unit.
//
// It adds one exact product per cycle and is wide enough that DOT_LEN
// (256) products of the largest magnitude can never overflow it, so the
// sum is bit-exact for any dot product of up to DOT_LEN terms. This
// sizing rule, and the resulting widths (16..19 bits), are the paper's:
// its MAC units carry an accumulator "sized to iteratively add 256 terms"
// losslessly. How terms are framed into dot products is this design's.
//
// Interface and timing:
//   in_valid/prod  one product per cycle when in_valid is high.
//   in_last        marks the final product of a dot product that is
//                  shorter than DOT_LEN (e.g. a 128-element quantization
//                  block). The DOT_LEN-th product always ends one.
//   acc/out_valid  the cycle after the final product is accepted, out_valid
//                  pulses for one cycle and acc holds the finished sum;
//                  acc keeps it until the next product arrives. The first
//                  product of a new dot product loads acc instead of adding,
//                  so back-to-back dot products need no idle cycle.
//   term_cnt       number of products already in the current dot product.
// Reset (rst_n) is active-low and asynchronous; it clears the sum and the
// term counter.
module mac_accumulator #(
  parameter int unsigned PROD_W  = 9,
  parameter int unsigned DOT_LEN = lowbit_pkg::DOT_LEN_DEFAULT,
  parameter int unsigned ACC_W   = lowbit_pkg::acc_width(PROD_W - 1, DOT_LEN),
  localparam int unsigned CNT_W  = (DOT_LEN > 1) ? $clog2(DOT_LEN) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  logic signed [PROD_W-1:0] prod,
  output logic signed [ACC_W-1:0]  acc,
  output logic                     out_valid,
  output logic [CNT_W-1:0]         term_cnt
);

  logic signed [ACC_W-1:0] prod_ext;
  logic signed [ACC_W:0]   sum_wide;   // one guard bit, for the overflow check
  logic                    first, final_term;

  always_comb begin
    prod_ext   = ACC_W'(prod);
    first      = (term_cnt == '0);
    sum_wide   = first ? (ACC_W+1)'(prod_ext) : (ACC_W+1)'(acc) + (ACC_W+1)'(prod_ext);
    final_term = in_last || (term_cnt == CNT_W'(DOT_LEN - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      term_cnt  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && final_term;
      if (in_valid) begin
        acc      <= sum_wide[ACC_W-1:0];
        term_cnt <= final_term ? '0 : term_cnt + 1'b1;
      end
    end
  end

  // Lossless accumulation: the guard bit must always equal the sign bit.
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> sum_wide[ACC_W] == sum_wide[ACC_W-1])
    else $error("mac_accumulator: overflow of the %0d-bit accumulator", ACC_W);

endmodule
