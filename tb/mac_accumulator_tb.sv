// mac_accumulator_tb: self-checking test of the lossless accumulator at
// its default size (9-bit products, DOT_LEN = 256, hence 17 bits).
//
// A cycle-by-cycle model keeps the expected sum and term count. Every
// cycle the test checks out_valid against the model (it must pulse exactly
// one cycle after a dot product's final term, and never otherwise) and,
// when it pulses, the sum. Scenarios: full 256-term dot products of the
// largest positive and negative products (the corner the width was sized
// for), 256-term and short dot products of random products with random
// idle cycles, and back-to-back dot products. The rate check: a gap-free
// 256-term dot product must deliver exactly 257 cycles after its first term.
`timescale 1ns/1ps
module mac_accumulator_tb;
  localparam int unsigned PW = 9, N = 256, AW = 17;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_last = 1'b0;
  logic signed [PW-1:0] prod = '0;
  logic signed [AW-1:0] acc;
  logic out_valid;
  logic [7:0] term_cnt;

  mac_accumulator #(.PROD_W(PW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint model_sum = 0;
  int     model_cnt = 0;
  bit     exp_valid = 0;
  longint exp_sum   = 0;

  // One clock: check what the previous cycle produced, then drive.
  task automatic cycle(bit v, bit last, int p);
    @(negedge clk);
    checks++;
    if (out_valid !== exp_valid) begin
      failures++; $display("%0t out_valid=%0b expected %0b", $time, out_valid, exp_valid);
    end
    if (exp_valid) begin
      checks++;
      if (longint'(acc) != exp_sum) begin
        failures++; $display("%0t sum %0d expected %0d", $time, acc, exp_sum);
      end
    end
    in_valid = v; in_last = last; prod = PW'(p);
    exp_valid = 0;
    if (v) begin
      model_sum = (model_cnt == 0) ? p : model_sum + p;
      if (last || model_cnt == N - 1) begin
        exp_valid = 1; exp_sum = model_sum; model_cnt = 0;
      end else model_cnt++;
    end
  endtask

  task automatic dot(int len, int kind, bit gaps);
    for (int i = 0; i < len; i++) begin
      int p;
      case (kind)
        0: p = 144;
        1: p = -144;
        default: p = int'($urandom_range(0, 2*255)) - 255;
      endcase
      if (gaps && $urandom_range(0, 3) == 0) cycle(0, 0, 0);
      cycle(1, (i == len - 1) && (len < N || $urandom_range(0, 1) == 1), p);
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // rate: first term at the cycle after t0, result the cycle after term 256
    t0 = int'($time);
    dot(N, 0, 0);
    cycle(0, 0, 0);
    t1 = int'($time);
    checks++;
    if ((t1 - t0) / 10 != N + 1) begin
      failures++; $display("latency %0d cycles, expected %0d", (t1 - t0) / 10, N + 1);
    end
    dot(N, 1, 0);
    dot(N, 0, 1);
    for (int k = 0; k < 20; k++) dot(int'($urandom_range(1, N)), 2, k[0]);
    for (int k = 0; k < 20; k++) dot(int'($urandom_range(1, 4)), 2, 0);
    dot(N, 2, 0);
    cycle(0, 0, 0);
    cycle(0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
