// adder2_tb: random operands, including extremes; the registered sum must
// equal a+b (mod 2^W) exactly one clock later.
module adder2_tb;
  localparam int W = 24;
  logic clk = 0;
  logic signed [W-1:0] a, b, sum;
  int checks = 0, failures = 0;
  adder2 #(.W(W)) dut (.clk, .a, .b, .sum);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic signed [W-1:0] ea;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a = W'($urandom); b = W'($urandom);
      if (i < 4) begin a = (i[0]) ? {1'b0,{(W-1){1'b1}}} : -1; b = (i[1]) ? 1 : -5; end
      ea = W'(a + b);
      @(posedge clk); #1;
      checks++;
      if (sum !== ea) begin failures++; $display("adder2 mismatch %0d+%0d=%0d", a, b, sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
