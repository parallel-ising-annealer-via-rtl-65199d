// func1_tb: streams random positions and coefficients through FUNC1 and checks
// every output, 4 clocks after its input, against the fixed-point reference
// (|x|, floor-shifted products, clamp to [0, 2^15-1]). A second part uses the
// coefficients a0 = 1, a1 = -0.25, a2 = -0.35 and checks that the output stays
// within 0.125 of 1 - tanh^2(x) for |x| <= 1.2, i.e. that the quadratic really
// stands in for the derivative of tanh.
module func1_tb;
  logic clk = 0;
  logic signed [15:0] x, a0, a1, a2, d;
  longint exp_q [$];
  int checks = 0, failures = 0, clamps = 0;
  func1 #(.W(16), .FRAC(10)) dut (.clk, .x, .a0, .a1, .a2, .d);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    real ref_d;
    a0 = 16'sd1024; a1 = -16'sd256; a2 = -16'sd358;
    for (int t = 0; t < 404; t++) begin
      @(negedge clk);
      if (t >= 4) begin
        checks++;
        e = exp_q.pop_front();
        if (e == 0) clamps++;
        if (longint'(d) != e) begin failures++; $display("func1 t=%0d got %0d exp %0d", t, d, e); end
      end
      x = (t % 3 == 0) ? 16'($urandom) : 16'(fx_model_pkg::rnd_s(12));
      if (t == 7) x = -16'sd32768;
      exp_q.push_back(fx_model_pkg::f1(x, a0, a1, a2));
    end
    checks++;
    if (clamps == 0) begin failures++; $display("func1: clamp never exercised"); end
    // accuracy against the function it approximates
    for (int k = -12; k <= 12; k++) begin
      @(negedge clk);
      x = 16'(k * 1024 / 10);
      repeat (4) @(negedge clk);
      ref_d = 1.0 - $tanh(real'(x) / 1024.0) ** 2;
      checks++;
      if ((real'(d) / 1024.0 - ref_d) > 0.125 || (ref_d - real'(d) / 1024.0) > 0.125) begin
        failures++; $display("func1 approx x=%0d got %f exp %f", x, real'(d) / 1024.0, ref_d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
