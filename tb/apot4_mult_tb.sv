// apot4_mult_tb: exhaustive check of the APoT4 multiplier, with and
// without the super-precision code.
//
// Reference: a code {s, i1, i2} has magnitude S1[i1] + S2[i2] in units of
// 1/16, with S1 = {0, 8, 4, 1} (0, 2^-1, 2^-2, 2^-4) and S2 = {0, 2}
// (0, 2^-3); in the SP variant code 8 is +5/16. The test first checks that
// the 8 magnitudes are exactly the published ones {0,1,2,3,4,6,8,10}/16
// (0, 0.1, ..., 1.0 after dividing by 10/16), then checks all 256 products
// of both variants against the integer product of the values.
module apot4_mult_tb;
  int checks = 0, failures = 0;
  logic [3:0] a, b;
  logic signed [7:0] p_base, p_sp;

  apot4_mult #(.SP(1'b0)) dut_base (.a, .b, .p(p_base));
  apot4_mult #(.SP(1'b1)) dut_sp   (.a, .b, .p(p_sp));

  function automatic int val16(bit sp, logic [3:0] c);
    int s1 [4] = '{0, 8, 4, 1};
    int s2 [2] = '{0, 2};
    int m = s1[c[2:1]] + s2[c[0]];
    if (sp && c == 4'b1000) return 5;
    return c[3] ? -m : m;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen [11];
    foreach (seen[k]) seen[k] = 0;
    for (int i = 0; i < 8; i++) seen[val16(1'b0, 4'(i))]++;
    foreach (seen[k]) begin
      bit want;
      want = (k inside {0, 1, 2, 3, 4, 6, 8, 10});
      checks++;
      if ((seen[k] == 1) != want) begin failures++; $display("magnitude %0d/16 count %0d", k, seen[k]); end
    end
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        int e0, e1;
        a = 4'(i); b = 4'(j);
        #1;
        e0 = val16(1'b0, a) * val16(1'b0, b);
        e1 = val16(1'b1, a) * val16(1'b1, b);
        checks += 2;
        if (int'(p_base) != e0) begin failures++; $display("base %h*%h: got %0d exp %0d", a, b, p_base, e0); end
        if (int'(p_sp) != e1)   begin failures++; $display("SP %h*%h: got %0d exp %0d", a, b, p_sp, e1); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
