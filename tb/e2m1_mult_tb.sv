// e2m1_mult_tb: exhaustive check of the E2M1 multiplier in all three
// variants (base, super-range, super-precision).
//
// The reference takes each code's value straight from the published value
// list of the formats (in half units: 0, 0.5, 1, 1.5, 2, 3, 4, 6 for codes
// 0..7, the negatives for 8..15, and +8 or +5 for code 8 in SR and SP) and
// multiplies the two as integers. All 256 code pairs are checked for every
// variant. Combinational block: each pair settles in 1 ns.
module e2m1_mult_tb;
  import lowbit_pkg::*;

  int checks = 0, failures = 0;
  logic [3:0] a, b;
  logic signed [8:0]  p_base;
  logic signed [9:0]  p_sr;
  logic signed [10:0] p_sp;

  e2m1_mult #(.VARIANT(SN_NONE)) dut_base (.a, .b, .p(p_base));
  e2m1_mult #(.VARIANT(SN_SR))   dut_sr   (.a, .b, .p(p_sr));
  e2m1_mult #(.VARIANT(SN_SP))   dut_sp   (.a, .b, .p(p_sp));

  // Value of a code in units of 0.5.
  function automatic int half_units(supernormal_e v, logic [3:0] c);
    int mag [8] = '{0, 1, 2, 3, 4, 6, 8, 12};
    if (c == 4'b1000 && v == SN_SR) return 16;
    if (c == 4'b1000 && v == SN_SP) return 10;
    return c[3] ? -mag[c[2:0]] : mag[c[2:0]];
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      for (int j = 0; j < 16; j++) begin
        int eb, esr, esp;
        a = 4'(i); b = 4'(j);
        #1;
        eb  = half_units(SN_NONE, a) * half_units(SN_NONE, b);      // units 1/4
        esr = half_units(SN_SR, a)   * half_units(SN_SR, b);        // units 1/4
        esp = half_units(SN_SP, a)   * half_units(SN_SP, b) * 4;    // units 1/16
        checks += 3;
        if (int'(p_base) != eb) begin failures++; $display("base %h*%h: got %0d exp %0d", a, b, p_base, eb); end
        if (int'(p_sr) != esr)  begin failures++; $display("SR %h*%h: got %0d exp %0d", a, b, p_sr, esr); end
        if (int'(p_sp) != esp)  begin failures++; $display("SP %h*%h: got %0d exp %0d", a, b, p_sp, esp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
