// square_tb: random operands over the whole 16-bit range; the result must be
// floor(a*a / 2^10) saturated to 22 bits (here it never saturates) and, with a
// narrow 16-bit output, saturate at 2^15-1. Latency one clock.
module square_tb;
  logic clk = 0;
  logic signed [15:0] a;
  logic signed [21:0] sq;
  logic signed [15:0] sqn;
  int checks = 0, failures = 0;
  square #(.WI(16), .WO(22), .FRAC(10)) dut  (.clk, .a, .sq);
  square #(.WI(16), .WO(16), .FRAC(10)) dutn (.clk, .a, .sq(sqn));
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e, en;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a = 16'($urandom);
      if (i == 0) a = -16'sd32768;
      if (i == 1) a = 16'sd1024;
      e  = fx_model_pkg::fmul(a, a, 10, 22);
      en = fx_model_pkg::fmul(a, a, 10, 16);
      @(posedge clk); #1;
      checks += 2;
      if (longint'(sq)  != e)  begin failures++; $display("square %0d -> %0d exp %0d", a, sq, e); end
      if (longint'(sqn) != en) begin failures++; $display("square16 %0d -> %0d exp %0d", a, sqn, en); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
