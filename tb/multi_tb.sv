// multi_tb: random signed operands (16 x 24 bits, Q.10 scale); the product
// must be floor(a*b / 2^10) saturated to 24 bits, one clock later. Large
// operands are included so that saturation at both ends is exercised.
module multi_tb;
  logic clk = 0;
  logic signed [15:0] a;
  logic signed [23:0] b, p;
  int checks = 0, failures = 0, sats = 0;
  multi #(.WA(16), .WB(24), .WO(24), .FRAC(10)) dut (.clk, .a, .b, .p);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      a = 16'($urandom);
      b = (i % 2) ? 24'(fx_model_pkg::rnd_s(16)) : 24'($urandom);
      e = fx_model_pkg::fmul(a, b, 10, 24);
      if (e == 8388607 || e == -8388608) sats++;
      @(posedge clk); #1;
      checks++;
      if (longint'(p) != e) begin failures++; $display("multi %0d*%0d -> %0d exp %0d", a, b, p, e); end
    end
    checks++;
    if (sats == 0) begin failures++; $display("multi: saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
