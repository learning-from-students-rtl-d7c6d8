// apot4_mac_tb: end-to-end test of the APoT4 and APoT4+SP MAC units at
// the default DOT_LEN = 256.
//
// Both units see the same code stream. The model gives code {s, i1, i2}
// the value S1[i1] + S2[i2] in units of 1/16, S1 = {0, 8, 4, 1},
// S2 = {0, 2}, and +5/16 for code 8 in the SP unit; products are in units
// of 1/256. Each cycle the test checks out_valid, and each result is
// compared with the model. Scenarios: 256 products of the largest
// magnitude (10/16 squared, positive and negative: the 16-bit accumulator
// must hold them exactly), the SP point squared, random 256-term and
// 128-term dot products and short ones back to back.
`timescale 1ns/1ps
module apot4_mac_tb;
  localparam int unsigned N = 256;

  int checks = 0, failures = 0, sp_codes = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic [3:0] a = '0, b = '0;
  logic signed [15:0] acc0, acc1;
  logic [1:0] ov;
  logic [7:0] cnt0, cnt1;

  apot4_mac #(.SP(1'b0)) u0 (.clk, .rst_n, .in_valid, .in_last, .a, .b, .acc(acc0), .out_valid(ov[0]), .term_cnt(cnt0));
  apot4_mac #(.SP(1'b1)) u1 (.clk, .rst_n, .in_valid, .in_last, .a, .b, .acc(acc1), .out_valid(ov[1]), .term_cnt(cnt1));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int val16(int sp, logic [3:0] c);
    int s1 [4] = '{0, 8, 4, 1};
    int s2 [2] = '{0, 2};
    int m = s1[c[2:1]] + s2[c[0]];
    if (sp == 1 && c == 4'b1000) return 5;
    return c[3] ? -m : m;
  endfunction

  longint msum [2] = '{0, 0};
  int     mcnt = 0;
  bit     exp_valid = 0;
  longint exp_sum [2];

  task automatic cycle(bit v, bit last, logic [3:0] x, logic [3:0] y);
    @(negedge clk);
    checks++;
    if (ov !== {2{exp_valid}}) begin
      failures++; $display("%0t out_valid=%b expected %0b", $time, ov, exp_valid);
    end
    if (exp_valid) begin
      checks += 2;
      if (longint'(acc0) != exp_sum[0]) begin failures++; $display("%0t APoT4 %0d exp %0d", $time, acc0, exp_sum[0]); end
      if (longint'(acc1) != exp_sum[1]) begin failures++; $display("%0t APoT4+SP %0d exp %0d", $time, acc1, exp_sum[1]); end
    end
    in_valid = v; in_last = last; a = x; b = y;
    exp_valid = 0;
    if (v) begin
      if (x == 4'b1000 || y == 4'b1000) sp_codes++;
      for (int k = 0; k < 2; k++)
        msum[k] = (mcnt == 0) ? val16(k, x) * val16(k, y) : msum[k] + val16(k, x) * val16(k, y);
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
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    dot(N, 4'b0011, 4'b0011, 0);   // 10/16 * 10/16
    dot(N, 4'b0011, 4'b1011, 0);   // 10/16 * -10/16
    dot(N, 4'b1000, 4'b1000, 0);   // SP: 5/16 * 5/16
    for (int k = 0; k < 6; k++) dot(N, 0, 0, 1);
    for (int k = 0; k < 6; k++) dot(128, 0, 0, 1);
    for (int k = 0; k < 30; k++) dot(int'($urandom_range(1, 5)), 0, 0, 1);
    cycle(0, 0, 0, 0);
    cycle(0, 0, 0, 0);
    checks++;
    if (sp_codes == 0) begin failures++; $display("SP code never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
