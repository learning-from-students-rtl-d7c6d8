// e2m1_mac_tb: end-to-end test of the three E2M1 MAC units (base, SR, SP)
// at the default DOT_LEN = 256.
//
// All three units see the same code stream. A model per unit takes each
// code's value from the published value lists (E2M1: 0, 0.5, 1, 1.5, 2, 3,
// 4, 6 and negatives; SR adds +8 and SP adds +5 on the negative-zero code),
// multiplies and sums, and the test checks each unit's sum and out_valid
// timing every cycle. Scenarios: the largest-magnitude 256-term dot
// product of each variant (6*6 for base and SP, 8*8 for SR: the accumulator
// width must hold it), random 256-term and 128-term (one quantization
// block) dot products, and random short ones back to back. The accumulator
// widths are checked against the reported 17/18/19 bits.
`timescale 1ns/1ps
module e2m1_mac_tb;
  import lowbit_pkg::*;
  localparam int unsigned N = 256;

  int checks = 0, failures = 0;
  int sr_codes = 0, sp_codes = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [3:0] a = '0, b = '0;
  logic signed [16:0] acc0;
  logic signed [17:0] acc1;
  logic signed [18:0] acc2;
  logic [2:0] ov;
  logic [7:0] cnt0, cnt1, cnt2;

  e2m1_mac #(.VARIANT(SN_NONE)) u0 (.clk, .rst_n, .in_valid, .in_last, .a, .b, .acc(acc0), .out_valid(ov[0]), .term_cnt(cnt0));
  e2m1_mac #(.VARIANT(SN_SR))   u1 (.clk, .rst_n, .in_valid, .in_last, .a, .b, .acc(acc1), .out_valid(ov[1]), .term_cnt(cnt1));
  e2m1_mac #(.VARIANT(SN_SP))   u2 (.clk, .rst_n, .in_valid, .in_last, .a, .b, .acc(acc2), .out_valid(ov[2]), .term_cnt(cnt2));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Value of a code in units of 0.5.
  function automatic int hv(int v, logic [3:0] c);
    int mag [8] = '{0, 1, 2, 3, 4, 6, 8, 12};
    if (c == 4'b1000 && v == 1) return 16;
    if (c == 4'b1000 && v == 2) return 10;
    return c[3] ? -mag[c[2:0]] : mag[c[2:0]];
  endfunction

  // Product in the unit's own LSB: 1/4 for base and SR, 1/16 for SP.
  function automatic int prod(int v, logic [3:0] x, logic [3:0] y);
    return hv(v, x) * hv(v, y) * ((v == 2) ? 4 : 1);
  endfunction

  longint msum [3] = '{0, 0, 0};
  int     mcnt = 0;
  bit     exp_valid = 0;
  longint exp_sum [3];

  task automatic cycle(bit v, bit last, logic [3:0] x, logic [3:0] y);
    @(negedge clk);
    checks++;
    if (ov !== {3{exp_valid}}) begin
      failures++; $display("%0t out_valid=%b expected %0b", $time, ov, exp_valid);
    end
    if (exp_valid) begin
      checks += 3;
      if (longint'(acc0) != exp_sum[0]) begin failures++; $display("%0t E2M1 %0d exp %0d", $time, acc0, exp_sum[0]); end
      if (longint'(acc1) != exp_sum[1]) begin failures++; $display("%0t SR %0d exp %0d", $time, acc1, exp_sum[1]); end
      if (longint'(acc2) != exp_sum[2]) begin failures++; $display("%0t SP %0d exp %0d", $time, acc2, exp_sum[2]); end
    end
    in_valid = v; in_last = last; a = x; b = y;
    exp_valid = 0;
    if (v) begin
      if (x == 4'b1000 || y == 4'b1000) begin sr_codes++; sp_codes++; end
      for (int k = 0; k < 3; k++)
        msum[k] = (mcnt == 0) ? prod(k, x, y) : msum[k] + prod(k, x, y);
      if (last || mcnt == N - 1) begin
        exp_valid = 1; exp_sum = msum; mcnt = 0;
      end else mcnt++;
    end
  endtask

  task automatic dot(int len, logic [3:0] fx, logic [3:0] fy, bit rnd);
    for (int i = 0; i < len; i++) begin
      logic [3:0] x = rnd ? 4'($urandom) : fx;
      logic [3:0] y = rnd ? 4'($urandom) : fy;
      cycle(1, (i == len - 1) && len < N, x, y);
    end
  endtask

  initial begin
    checks += 3;
    if ($bits(acc0) != 17 || $bits(u0.acc) != 17) failures++;
    if ($bits(u1.acc) != 18) failures++;
    if ($bits(u2.acc) != 19) failures++;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    dot(N, 4'b0111, 4'b0111, 0);   // 6 * 6, 256 times
    dot(N, 4'b1000, 4'b1000, 0);   // SR: 8 * 8; SP: 5 * 5; base: 0
    dot(N, 4'b0111, 4'b1111, 0);   // 6 * -6
    dot(N, 4'b1000, 4'b1111, 0);   // SR: 8 * -6
    for (int k = 0; k < 6; k++) dot(N, 0, 0, 1);
    for (int k = 0; k < 6; k++) dot(128, 0, 0, 1);
    for (int k = 0; k < 30; k++) dot(int'($urandom_range(1, 5)), 0, 0, 1);
    cycle(0, 0, 0, 0);
    cycle(0, 0, 0, 0);
    checks++;
    if (sr_codes == 0 || sp_codes == 0) begin failures++; $display("supernormal code never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
