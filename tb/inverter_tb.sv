// inverter_tb: the output must be -a, sign-extended to 24 bits, one clock
// after the input, including a = -2^15 (which needs the extra bit).
module inverter_tb;
  logic clk = 0;
  logic signed [15:0] a;
  logic signed [23:0] neg;
  int checks = 0, failures = 0;
  inverter #(.WI(16), .WO(24)) dut (.clk, .a, .neg);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      a = 16'($urandom);
      if (i == 0) a = -16'sd32768;
      if (i == 1) a = 16'sd0;
      e = -longint'(a);
      @(posedge clk); #1;
      checks++;
      if (longint'(neg) != e) begin failures++; $display("inverter %0d -> %0d", a, neg); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
