// vdot_block_tb: streams random (x, I) pairs with random gaps through the
// momentum-derivative block at several beta values and checks each
// vdot = sat23(f1(x) * sat24(beta*I)) - x against the fixed-point reference,
// and that out_valid comes exactly 6 clocks after in_valid.
module vdot_block_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  logic signed [15:0] x, beta, a0, a1, a2;
  logic signed [23:0] field, vdot;
  longint exp_q [$];
  int vld_t [$];
  int checks = 0, failures = 0, t = 0;
  vdot_block #(.DW(16), .FW(24), .FRAC(10)) dut (.clk, .rst_n, .in_valid, .x, .field, .beta, .a0, .a1, .a2, .out_valid, .vdot);
  always #5 clk = ~clk;
  always @(posedge clk) t <= t + 1;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (rst_n && out_valid) begin
    longint e; int t0;
    checks += 2;
    e = exp_q.pop_front(); t0 = vld_t.pop_front();
    if (longint'(vdot) != e) begin failures++; $display("vdot got %0d exp %0d", vdot, e); end
    if (t - t0 != 6) begin failures++; $display("vdot latency %0d", t - t0); end
  end
  initial begin
    longint d, bi, e;
    in_valid = 0; x = 0; field = 0;
    a0 = 16'sd1024; a1 = -16'sd256; a2 = -16'sd358;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 4; blk++) begin
      beta = 16'(256 + blk * 700);
      for (int n = 0; n < 80; n++) begin
        @(negedge clk);
        in_valid = ($urandom_range(0, 4) != 0);
        x = 16'(fx_model_pkg::rnd_s(13));
        field = 24'(fx_model_pkg::rnd_s(20));
        if (n == 3) field = 24'sh7FFFFF;
        d  = fx_model_pkg::f1(x, a0, a1, a2);
        bi = fx_model_pkg::fmul(beta, field, 10, 24);
        e  = fx_model_pkg::fmul(d, bi, 10, 23) - longint'(x);
        if (in_valid) begin exp_q.push_back(e); vld_t.push_back(t); end
      end
      @(negedge clk); in_valid = 0;
      repeat (8) @(negedge clk);   // beta only changes between passes
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("vdot: results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
