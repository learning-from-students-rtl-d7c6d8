// lowbit_mac_top_tb: end-to-end test of the whole design at its default
// parameters (DOT_LEN = 256, SF4 with nu = 5, 16-bit scale).
//
// A stream of dot products is driven through the single operand port, each
// in a format drawn at random (E2M1, +SR, +SP, APoT4, APoT4+SP), of random
// length up to 256, sometimes with idle cycles and sometimes back to back.
// A reference model computes each sum from the published value lists of
// the formats, and every cycle the test checks out_valid, and on a result
// also result, result_frac and result_fmt. It counts the mechanisms the
// design has and fails if one never happened: a format switch between dot
// products, a dot product ended by in_last (a 128-term quantization block
// among them), one ended automatically after 256 terms, back-to-back dot
// products, fmt_sel changing mid-way and being ignored, the SR and SP
// supernormal codes used in their own formats, a full-scale 256-term dot
// product per format, and the E2M1 subnormal 0.5. The SF4 lookup output is
// checked against the published nu = 5 values.
`timescale 1ns/1ps
module lowbit_mac_top_tb;
  import lowbit_pkg::*;
  localparam int unsigned N = 256;

  int checks = 0, failures = 0;
  int n_switch = 0, n_last = 0, n_block128 = 0, n_auto = 0, n_b2b = 0;
  int n_midsel = 0, n_sr = 0, n_sp = 0, n_sub = 0, n_results = 0;
  int n_full [5] = '{0, 0, 0, 0, 0};

  logic clk = 1'b0, rst_n = 1'b0;
  fmt_e fmt_sel = FMT_E2M1;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [3:0] a = '0, b = '0;
  logic busy, out_valid;
  logic signed [18:0] result;
  logic [3:0] result_frac;
  fmt_e result_fmt;
  logic [3:0] sf4_code = '0;
  logic signed [15:0] sf4_scale = '0;
  logic signed [15:0] sf4_value;
  logic signed [31:0] sf4_deq;

  lowbit_mac_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Value of a code in the smallest unit of its format family:
  // E2M1 family in units of 0.5, APoT4 family in units of 1/16.
  function automatic int val(fmt_e f, logic [3:0] c);
    int e2m1 [8] = '{0, 1, 2, 3, 4, 6, 8, 12};
    int s1 [4]   = '{0, 8, 4, 1};
    int s2 [2]   = '{0, 2};
    int m;
    if (c == 4'b1000) begin
      case (f)
        FMT_E2M1_SR:  return 16;   // +8.0
        FMT_E2M1_SP:  return 10;   // +5.0
        FMT_APOT4_SP: return 5;    // +5/16
        default:      return 0;
      endcase
    end
    m = (f inside {FMT_APOT4, FMT_APOT4_SP}) ? s1[c[2:1]] + s2[c[0]] : e2m1[c[2:0]];
    return c[3] ? -m : m;
  endfunction

  // Product scaled to the result LSB 2^-frac.
  function automatic int prod(fmt_e f, logic [3:0] x, logic [3:0] y);
    return val(f, x) * val(f, y) * ((f == FMT_E2M1_SP) ? 4 : 1);
  endfunction

  function automatic int frac(fmt_e f);
    case (f)
      FMT_E2M1_SP:            return 4;
      FMT_APOT4, FMT_APOT4_SP: return 8;
      default:                return 2;
    endcase
  endfunction

  longint msum = 0;
  int     mcnt = 0;
  fmt_e   mfmt = FMT_E2M1, last_fmt = FMT_E2M1;
  bit     exp_valid = 0, started = 0;
  longint exp_sum = 0;
  fmt_e   exp_fmt = FMT_E2M1;

  task automatic cycle(bit v, bit last, fmt_e sel, logic [3:0] x, logic [3:0] y);
    @(negedge clk);
    checks++;
    if (out_valid !== exp_valid) begin
      failures++; $display("%0t out_valid=%0b expected %0b", $time, out_valid, exp_valid);
    end
    if (exp_valid) begin
      n_results++;
      checks += 3;
      if (longint'(result) != exp_sum) begin failures++; $display("%0t %s: %0d exp %0d", $time, exp_fmt.name(), result, exp_sum); end
      if (result_fmt != exp_fmt) begin failures++; $display("%0t fmt %s exp %s", $time, result_fmt.name(), exp_fmt.name()); end
      if (int'(result_frac) != frac(exp_fmt)) begin failures++; $display("%0t frac %0d", $time, result_frac); end
    end
    in_valid = v; in_last = last; fmt_sel = sel; a = x; b = y;
    exp_valid = 0;
    if (v) begin
      if (mcnt == 0) begin
        if (started && sel != last_fmt) n_switch++;
        if (exp_valid_prev) n_b2b++;
        mfmt = sel; started = 1; last_fmt = sel;
      end else if (sel != mfmt) n_midsel++;
      if ((x == 4'b1000 || y == 4'b1000) && mfmt == FMT_E2M1_SR) n_sr++;
      if ((x == 4'b1000 || y == 4'b1000) && mfmt inside {FMT_E2M1_SP, FMT_APOT4_SP}) n_sp++;
      if ((x[2:0] == 3'b001 || y[2:0] == 3'b001) && mfmt inside {FMT_E2M1, FMT_E2M1_SR, FMT_E2M1_SP}) n_sub++;
      msum = (mcnt == 0) ? prod(mfmt, x, y) : msum + prod(mfmt, x, y);
      if (last || mcnt == N - 1) begin
        if (last) n_last++; else n_auto++;
        if (last && mcnt == 127) n_block128++;
        exp_valid = 1; exp_sum = msum; exp_fmt = mfmt; mcnt = 0;
      end else mcnt++;
    end
    exp_valid_prev = exp_valid;
  endtask
  bit exp_valid_prev = 0;

  // One dot product: kind 0 random codes, 1 largest positive products.
  task automatic dot(fmt_e f, int len, int kind, bit gaps, bit use_last, bit jiggle_sel);
    logic [3:0] big;
    big = (f == FMT_E2M1_SR) ? 4'b1000 : (f inside {FMT_APOT4, FMT_APOT4_SP}) ? 4'b0011 : 4'b0111;
    for (int i = 0; i < len; i++) begin
      logic [3:0] x, y;
      fmt_e s;
      x = (kind == 1) ? big : 4'($urandom);
      y = (kind == 1) ? big : 4'($urandom);
      s = (i > 0 && jiggle_sel) ? fmt_e'($urandom_range(0, 4)) : f;
      if (gaps && i > 0 && $urandom_range(0, 5) == 0) cycle(0, 0, s, 0, 0);
      cycle(1, (i == len - 1) && use_last, s, x, y);
    end
    if (kind == 1 && len == N) n_full[f]++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // full-scale 256-term dot products, one per format, back to back
    for (int f = 0; f < 5; f++) dot(fmt_e'(f), N, 1, 0, 0, 0);
    // quantization-block-sized (128) and full-length random dot products
    for (int k = 0; k < 10; k++) dot(fmt_e'($urandom_range(0, 4)), 128, 0, k[0], 1, 0);
    for (int k = 0; k < 10; k++) dot(fmt_e'($urandom_range(0, 4)), N, 0, k[0], k[1], k[2]);
    // short dot products, format changing each time, select jiggled mid-way
    for (int k = 0; k < 60; k++) dot(fmt_e'($urandom_range(0, 4)), int'($urandom_range(1, 6)), 0, k[1], 1, k[0]);
    cycle(0, 0, FMT_E2M1, 0, 0);
    cycle(0, 0, FMT_E2M1, 0, 0);

    // SF4 lookup, nu = 5: published values rounded to Q2.14
    begin
      int ref5 [16] = '{-16384, -10289, -7455, -5472, -3883, -2507, -1229, 0,
                         1081,   2179,  3359,  4653,  6160,  8045, 10764, 16384};
      for (int i = 0; i < 16; i++) begin
        sf4_code = 4'(i); sf4_scale = 16'sd3;
        #1;
        checks += 2;
        if (int'(sf4_value) != ref5[i]) begin failures++; $display("sf4 code %0d: %0d exp %0d", i, sf4_value, ref5[i]); end
        if (int'(sf4_deq) != 3 * ref5[i]) begin failures++; $display("sf4 deq code %0d: %0d", i, sf4_deq); end
      end
    end

    $display("mechanisms: results=%0d switches=%0d in_last=%0d block128=%0d auto256=%0d back2back=%0d midsel=%0d SR=%0d SP=%0d subnormal=%0d",
             n_results, n_switch, n_last, n_block128, n_auto, n_b2b, n_midsel, n_sr, n_sp, n_sub);
    checks++;
    if (n_switch == 0 || n_last == 0 || n_block128 == 0 || n_auto == 0 || n_b2b == 0 ||
        n_midsel == 0 || n_sr == 0 || n_sp == 0 || n_sub == 0) begin
      failures++; $display("a mechanism never happened");
    end
    foreach (n_full[f]) begin
      checks++;
      if (n_full[f] == 0) begin failures++; $display("no full-scale dot product in format %0d", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
