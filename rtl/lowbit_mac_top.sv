// lowbit_mac_top: the five 4-bit MAC units of the format study behind one
// operand stream, plus the SF4 lookup decoder for weight-only use.
//
// The paper builds one multiply-accumulate unit per 4-bit datatype and
// compares their accuracy and cost. This top holds the proposed units side
// by side: E2M1, E2M1 + super-range (SR), E2M1 + super-precision (SP),
// APoT4 and APoT4 + SP. A caller picks a format per dot product with
// fmt_sel; only the selected unit receives terms, the others hold their
// state. The SF4 lookup path (sf4_code/sf4_scale -> sf4_value/sf4_deq) is
// independent and combinational.
//
// Timing and framing:
//   * One term (a, b) per cycle while in_valid is high.
//   * fmt_sel is sampled with the first term of a dot product and held
//     until it ends; changing it mid-way has no effect (busy is high).
//   * A dot product ends with in_last, or automatically after DOT_LEN
//     (256) terms, the length the paper's accumulators are sized for.
//   * One cycle after the last term, out_valid pulses. result is the exact
//     sum, sign-extended to RES_W bits, in units of 2^-result_frac
//     (2 for E2M1 and +SR, 4 for +SP, 8 for the APoT4 formats), and
//     result_fmt names the format it was computed in.
// A new dot product may start in the cycle after the last term of the
// previous one, in the same or another format.
//
// The per-format units and their accumulator sizing follow the paper; the
// shared operand stream, format select and framing are this design's own
// (the paper evaluates each unit on its own).
module lowbit_mac_top
  import lowbit_pkg::*;
#(
  parameter int unsigned  DOT_LEN = DOT_LEN_DEFAULT,
  parameter int unsigned  NU      = 5,
  parameter int unsigned  SCALE_W = 16,
  localparam int unsigned RES_W   = acc_width(e2m1_prod_mag_w(SN_SP), DOT_LEN),
  localparam int unsigned CNT_W   = (DOT_LEN > 1) ? $clog2(DOT_LEN) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // 4-bit MAC stream
  input  fmt_e                      fmt_sel,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic [3:0]                a,
  input  logic [3:0]                b,
  output logic                      busy,
  output logic                      out_valid,
  output logic signed [RES_W-1:0]   result,
  output logic [3:0]                result_frac,
  output fmt_e                      result_fmt,
  // SF4 weight lookup
  input  logic [3:0]                sf4_code,
  input  logic signed [SCALE_W-1:0] sf4_scale,
  output logic signed [15:0]        sf4_value,
  output logic signed [SCALE_W+15:0] sf4_deq
);

  localparam int unsigned W_E2M1 = acc_width(e2m1_prod_mag_w(SN_NONE), DOT_LEN);
  localparam int unsigned W_SR   = acc_width(e2m1_prod_mag_w(SN_SR), DOT_LEN);
  localparam int unsigned W_SP   = acc_width(e2m1_prod_mag_w(SN_SP), DOT_LEN);
  localparam int unsigned W_APOT = acc_width(APOT_PROD_MAG_W, DOT_LEN);

  // ---------------------------------------------------------------- format
  fmt_e cur_fmt, act_fmt;
  logic [4:0] unit_v;          // one-hot valid per unit, indexed by fmt_e
  logic [CNT_W-1:0] cnt [5];
  logic [4:0] unit_out_v;
  logic final_term;

  always_comb begin
    act_fmt    = busy ? cur_fmt : fmt_sel;
    unit_v     = '0;
    if (in_valid && act_fmt <= FMT_APOT4_SP)
      unit_v[act_fmt] = 1'b1;
    final_term = in_last || (cnt[act_fmt] == CNT_W'(DOT_LEN - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_fmt    <= FMT_E2M1;
      busy       <= 1'b0;
      result_fmt <= FMT_E2M1;
    end else if (in_valid) begin
      cur_fmt <= act_fmt;
      busy    <= !final_term;
      if (final_term) result_fmt <= act_fmt;
    end
  end

  // ----------------------------------------------------------------- units
  logic signed [W_E2M1-1:0] acc_e2m1;
  logic signed [W_SR-1:0]   acc_sr;
  logic signed [W_SP-1:0]   acc_sp;
  logic signed [W_APOT-1:0] acc_apot, acc_apot_sp;

  e2m1_mac #(.VARIANT(SN_NONE), .DOT_LEN(DOT_LEN)) u_e2m1 (
    .clk, .rst_n, .in_valid(unit_v[FMT_E2M1]), .in_last, .a, .b,
    .acc(acc_e2m1), .out_valid(unit_out_v[FMT_E2M1]), .term_cnt(cnt[FMT_E2M1]));

  e2m1_mac #(.VARIANT(SN_SR), .DOT_LEN(DOT_LEN)) u_e2m1_sr (
    .clk, .rst_n, .in_valid(unit_v[FMT_E2M1_SR]), .in_last, .a, .b,
    .acc(acc_sr), .out_valid(unit_out_v[FMT_E2M1_SR]), .term_cnt(cnt[FMT_E2M1_SR]));

  e2m1_mac #(.VARIANT(SN_SP), .DOT_LEN(DOT_LEN)) u_e2m1_sp (
    .clk, .rst_n, .in_valid(unit_v[FMT_E2M1_SP]), .in_last, .a, .b,
    .acc(acc_sp), .out_valid(unit_out_v[FMT_E2M1_SP]), .term_cnt(cnt[FMT_E2M1_SP]));

  apot4_mac #(.SP(1'b0), .DOT_LEN(DOT_LEN)) u_apot4 (
    .clk, .rst_n, .in_valid(unit_v[FMT_APOT4]), .in_last, .a, .b,
    .acc(acc_apot), .out_valid(unit_out_v[FMT_APOT4]), .term_cnt(cnt[FMT_APOT4]));

  apot4_mac #(.SP(1'b1), .DOT_LEN(DOT_LEN)) u_apot4_sp (
    .clk, .rst_n, .in_valid(unit_v[FMT_APOT4_SP]), .in_last, .a, .b,
    .acc(acc_apot_sp), .out_valid(unit_out_v[FMT_APOT4_SP]), .term_cnt(cnt[FMT_APOT4_SP]));

  // ---------------------------------------------------------------- result
  always_comb begin
    out_valid = |unit_out_v;
    case (result_fmt)
      FMT_E2M1_SR:  begin result = RES_W'(acc_sr);      result_frac = 4'(e2m1_prod_frac(SN_SR));  end
      FMT_E2M1_SP:  begin result = RES_W'(acc_sp);      result_frac = 4'(e2m1_prod_frac(SN_SP));  end
      FMT_APOT4:    begin result = RES_W'(acc_apot);    result_frac = 4'(APOT_PROD_FRAC);         end
      FMT_APOT4_SP: begin result = RES_W'(acc_apot_sp); result_frac = 4'(APOT_PROD_FRAC);         end
      default:      begin result = RES_W'(acc_e2m1);    result_frac = 4'(e2m1_prod_frac(SN_NONE)); end
    endcase
  end

  // Only the unit of the current dot product may deliver a result.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(unit_out_v))
    else $error("lowbit_mac_top: more than one unit delivered a result");

  // ------------------------------------------------------------ SF4 lookup
  sf4_lut #(.NU(NU), .SCALE_W(SCALE_W)) u_sf4 (
    .code  (sf4_code),
    .scale (sf4_scale),
    .value (sf4_value),
    .deq   (sf4_deq)
  );

endmodule
