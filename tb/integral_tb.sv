// integral_tb: streams random (state, deriv, eps) every clock; `next` must be
// sat16(state + floor(eps*deriv / 2^10)) exactly two clocks later. Both the
// 16-bit derivative (position update) and the 24-bit derivative (momentum
// update) configurations are tested.
module integral_tb;
  logic clk = 0;
  logic signed [15:0] st, dx, eps, nx, nv;
  logic signed [23:0] dv;
  longint ex_q [$], ev_q [$];
  int checks = 0, failures = 0;
  integral #(.WS(16), .WD(16), .FRAC(10)) dut_x (.clk, .state(st), .deriv(dx), .eps, .next(nx));
  integral #(.WS(16), .WD(24), .FRAC(10)) dut_v (.clk, .state(st), .deriv(dv), .eps, .next(nv));
  always #5 clk = ~clk;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e;
    for (int t = 0; t < 302; t++) begin
      @(negedge clk);
      if (t >= 2) begin
        checks += 2;
        e = ex_q.pop_front();
        if (longint'(nx) != e) begin failures++; $display("integral x t=%0d got %0d exp %0d", t, nx, e); end
        e = ev_q.pop_front();
        if (longint'(nv) != e) begin failures++; $display("integral v t=%0d got %0d exp %0d", t, nv, e); end
      end
      st  = 16'($urandom);
      dx  = 16'($urandom);
      dv  = 24'($urandom);
      eps = 16'($urandom_range(0, 2048));
      ex_q.push_back(fx_model_pkg::sat(longint'(st) + fx_model_pkg::fmul(eps, dx, 10, 16), 16));
      ev_q.push_back(fx_model_pkg::sat(longint'(st) + fx_model_pkg::fmul(eps, dv, 10, 16), 16));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
