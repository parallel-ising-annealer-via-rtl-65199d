// adder32_tb: streams a new set of 32 random operands every clock and checks
// that each sum comes out exactly 5 clocks later (the 5-stage pipeline), and
// that the result equals the sum computed in the testbench.
module adder32_tb;
  localparam int W = 21;
  logic clk = 0;
  logic signed [W-1:0] data [32];
  logic signed [W-1:0] sum;
  longint exp_q [$];
  int checks = 0, failures = 0;
  adder32 #(.W(W)) dut (.clk, .data, .sum);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    for (int t = 0; t < 205; t++) begin
      @(negedge clk);
      if (t >= 5) begin
        checks++;
        e = exp_q.pop_front();
        if (longint'(sum) != e) begin failures++; $display("adder32 t=%0d got %0d exp %0d", t, sum, e); end
      end
      e = 0;
      for (int k = 0; k < 32; k++) begin
        data[k] = W'(fx_model_pkg::rnd_s(16));
        if (t == 1) data[k] = W'(-32768);
        if (t == 2) data[k] = W'(k == 31 ? 32767 : 0);
        e += longint'(data[k]);
      end
      exp_q.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
