// sf4_lut_tb: checks the SF4 lookup decoder and its block-scale multiply.
//
// For nu = 5 (the default) and nu = 3, every code's value must equal the
// published three-decimal value converted to Q2.14 with rounding to
// nearest, computed here in real arithmetic. The test also checks the
// structure the derivation imposes: exact zero at code 7, strictly rising
// values, -1.0 and +1.0 at the ends, eight positive codes. The scaled
// output must equal value * scale for random signed scales.
module sf4_lut_tb;
  int checks = 0, failures = 0;
  logic [3:0] code;
  logic signed [15:0] scale;
  logic signed [15:0] v5, v3;
  logic signed [31:0] d5, d3;

  sf4_lut              dut5 (.code, .scale, .value(v5), .deq(d5));
  sf4_lut #(.NU(3))    dut3 (.code, .scale, .value(v3), .deq(d3));

  real ref5 [16] = '{-1.000, -0.628, -0.455, -0.334, -0.237, -0.153, -0.075, 0.000,
                      0.066,  0.133,  0.205,  0.284,  0.376,  0.491,  0.657, 1.000};
  real ref3 [16] = '{-1.000, -0.576, -0.404, -0.292, -0.205, -0.131, -0.064, 0.000,
                      0.056,  0.114,  0.176,  0.246,  0.330,  0.439,  0.606, 1.000};

  function automatic int q14(real r);
    real x = r * 16384.0;
    return (x < 0.0) ? -$rtoi(-x + 0.5) : $rtoi(x + 0.5);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev, npos;
    prev = -100000; npos = 0;
    for (int i = 0; i < 16; i++) begin
      code = 4'(i); scale = 16'sd1;
      #1;
      checks += 2;
      if (int'(v5) != q14(ref5[i])) begin failures++; $display("nu=5 code %0d: %0d exp %0d", i, v5, q14(ref5[i])); end
      if (int'(v3) != q14(ref3[i])) begin failures++; $display("nu=3 code %0d: %0d exp %0d", i, v3, q14(ref3[i])); end
      checks++;
      if (int'(v5) <= prev) begin failures++; $display("not rising at code %0d", i); end
      prev = int'(v5);
      if (v5 > 0) npos++;
      for (int k = 0; k < 8; k++) begin
        scale = 16'($urandom);
        #1;
        checks += 2;
        if (int'(d5) != int'(v5) * int'(scale)) begin failures++; $display("deq nu=5 code %0d scale %0d: %0d", i, scale, d5); end
        if (int'(d3) != int'(v3) * int'(scale)) begin failures++; $display("deq nu=3 code %0d scale %0d: %0d", i, scale, d3); end
      end
    end
    code = 4'd7; #1;
    checks += 4;
    if (v5 != 0) failures++;
    if (npos != 8) begin failures++; $display("%0d positive codes", npos); end
    code = 4'd0; #1; if (v5 != -16'sd16384) failures++;
    code = 4'd15; #1; if (v5 != 16'sd16384) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
