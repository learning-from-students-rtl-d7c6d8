// w4a4_block_tb: the W4A4 workload on the combined MAC top. Weights and
// activations are quantized in blocks of 128 elements, each block with its
// own scale, and every block becomes one 128-term dot product ended by
// in_last.
//
// For each of the five formats the testbench draws 128-element weight and
// activation blocks from a Student's t-distribution (nu = 5, built from
// Box-Muller normals). It quantizes each block symmetrically: scale by the
// block's largest magnitude onto the format's value set normalized to
// [-1, 1], then round to the nearest value. It then feeds the code pairs
// through lowbit_mac_top. Two things are checked:
//   * the unit's integer result equals the sum of the quantized products,
//     computed here from the code tables (exactness);
//   * the dequantized result, result x 2^-frac x both block scales, stays
//     close to the unquantized real dot product (relative RMS error below
//     0.45 over all blocks of the format; 4-bit formats typically land
//     between 0.15 and 0.3).
// The RMS error per format is printed for comparison between formats.
module w4a4_block_tb;
  import lowbit_pkg::*;

  localparam int BLK  = 128;
  localparam int NBLK = 100;

  int checks = 0, failures = 0;

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
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Signed value of a code in the family's smallest unit: E2M1 family in
  // units of 0.5, APoT4 family in units of 1/16.
  function automatic int val(fmt_e f, logic [3:0] c);
    int e2m1 [8] = '{0, 1, 2, 3, 4, 6, 8, 12};
    int s1 [4]   = '{0, 8, 4, 1};
    int s2 [2]   = '{0, 2};
    int m;
    if (c == 4'b1000) begin
      case (f)
        FMT_E2M1_SR:  return 16;
        FMT_E2M1_SP:  return 10;
        FMT_APOT4_SP: return 5;
        default:      return 0;
      endcase
    end
    m = (f inside {FMT_APOT4, FMT_APOT4_SP}) ? s1[c[2:1]] + s2[c[0]] : e2m1[c[2:0]];
    return c[3] ? -m : m;
  endfunction

  // Largest magnitude of the format, same units.
  function automatic int vmax(fmt_e f);
    case (f)
      FMT_E2M1_SR:              return 16;
      FMT_APOT4, FMT_APOT4_SP:  return 10;
      default:                  return 12;
    endcase
  endfunction

  // Product of two values in the product-LSB unit of the format.
  function automatic int prod(fmt_e f, int va, int vb);
    return (f == FMT_E2M1_SP) ? 4 * va * vb : va * vb;
  endfunction

  function automatic int frac(fmt_e f);
    case (f)
      FMT_E2M1_SP:             return 4;
      FMT_APOT4, FMT_APOT4_SP: return 8;
      default:                 return 2;
    endcase
  endfunction

  // Nearest code to x, where x is already in the format's value units.
  function automatic logic [3:0] quant(fmt_e f, real x);
    logic [3:0] best = '0;
    real bd = 1.0e9;
    for (int c = 0; c < 16; c++) begin
      real d;
      d = x - val(f, 4'(c));
      if (d < 0) d = -d;
      if (d < bd) begin bd = d; best = 4'(c); end
    end
    return best;
  endfunction

  function automatic real unif();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction

  function automatic real normal();
    return $sqrt(-2.0 * $ln(unif())) * $cos(2.0 * 3.14159265358979 * unif());
  endfunction

  function automatic real student5();
    real c = 0.0;
    for (int k = 0; k < 5; k++) begin
      real z;
      z = normal();
      c += z * z;
    end
    return normal() / $sqrt(c / 5.0);
  endfunction

  initial begin
    real w [BLK], x [BLK];
    logic [3:0] cw [BLK], cx [BLK];
    real err2, ref2;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int fi = 0; fi < 5; fi++) begin
      fmt_e f;
      f = fmt_e'(fi);
      err2 = 0.0;
      ref2 = 0.0;
      for (int blk = 0; blk < NBLK; blk++) begin
        real mw, mx, exact, deq, sw, sx;
        longint want;
        mw = 0.0;
        mx = 0.0;
        exact = 0.0;
        for (int i = 0; i < BLK; i++) begin
          w[i] = student5();
          x[i] = student5();
          if ((w[i] < 0 ? -w[i] : w[i]) > mw) mw = (w[i] < 0 ? -w[i] : w[i]);
          if ((x[i] < 0 ? -x[i] : x[i]) > mx) mx = (x[i] < 0 ? -x[i] : x[i]);
          exact += w[i] * x[i];
        end
        // block scales: real value of one format unit
        sw = mw / vmax(f);
        sx = mx / vmax(f);
        want = 0;
        for (int i = 0; i < BLK; i++) begin
          cw[i] = quant(f, w[i] / sw);
          cx[i] = quant(f, x[i] / sx);
          want += longint'(prod(f, val(f, cw[i]), val(f, cx[i])));
        end
        for (int i = 0; i < BLK; i++) begin
          fmt_sel = f;
          in_valid = 1'b1;
          in_last = (i == BLK - 1);
          a = cw[i];
          b = cx[i];
          @(negedge clk);
        end
        in_valid = 1'b0;
        in_last = 1'b0;
        checks += 2;
        if (!out_valid) begin
          failures++;
          $display("%s block %0d: no result", f.name(), blk);
        end
        if (longint'(result) != want || result_fmt != f || int'(result_frac) != frac(f)) begin
          failures++;
          $display("%s block %0d: result %0d frac %0d, expected %0d frac %0d",
                   f.name(), blk, result, result_frac, want, frac(f));
        end
        // dequantize: result counts product LSBs; one format unit squared
        // is 1 (E2M1, APoT4) or 4 (E2M1+SP) product LSBs
        deq = real'(result) / ((f == FMT_E2M1_SP) ? 4.0 : 1.0) * sw * sx;
        err2 += (deq - exact) * (deq - exact);
        ref2 += exact * exact;
        @(negedge clk);
      end
      checks++;
      $display("%-13s relative RMS dot-product error over %0d blocks of %0d: %f",
               f.name(), NBLK, BLK, $sqrt(err2 / ref2));
      if ($sqrt(err2 / ref2) > 0.45) begin
        failures++;
        $display("%s: quantized dot products too far from the real ones", f.name());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
