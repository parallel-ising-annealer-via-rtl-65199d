// momentum_rng_tb: loads a seed and compares 1000 steps of the generator with
// a reference xorshift32 and the arithmetic-shift scaling; checks that the
// state holds while en is low, that a zero seed does not lock the generator,
// and that the outputs cover both signs and stay within +-2^10.
module momentum_rng_tb;
  logic clk = 0, rst_n = 0;
  logic load, en;
  logic [31:0] seed;
  logic signed [15:0] r0, r1;
  int checks = 0, failures = 0, pos = 0, neg = 0;
  momentum_rng #(.DW(16), .V_SHIFT(5)) dut (.clk, .rst_n, .load, .seed, .en, .r0, .r1);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] xs(input logic [31:0] s);
    s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
    return s;
  endfunction
  initial begin
    logic [31:0] m;
    load = 0; en = 0; seed = 32'hDEADBEEF;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0; m = seed;
    for (int n = 0; n < 1000; n++) begin
      en = ($urandom_range(0, 4) != 0);
      checks += 2;
      if (r0 !== 16'($signed(m[15:0]) >>> 5))  begin failures++; $display("rng r0 step %0d", n); end
      if (r1 !== 16'($signed(m[31:16]) >>> 5)) begin failures++; $display("rng r1 step %0d", n); end
      if (r0 < 0) neg++; else pos++;
      if (r0 > 1023 || r0 < -1024) failures++;
      @(negedge clk);
      if (en) m = xs(m);
    end
    checks++;
    if (pos < 300 || neg < 300) begin failures++; $display("rng: unbalanced signs %0d %0d", pos, neg); end
    en = 0; seed = 0; load = 1;
    @(negedge clk); load = 0; en = 1;
    repeat (3) @(negedge clk);
    checks++;
    if (r0 == 0 && r1 == 0) begin failures++; $display("rng stuck at zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
