// hamiltonian_tb: builds small random Ising problems (n = 12, symmetric J with
// zero diagonal, random h), random x and v, and streams them through the block
// one spin per clock (with gaps). The reference computes E(sgn x) directly from
// the double sum over i<j of Eq. E = -sum J s s - sum h s, and
// H = floor(beta*E / 2^10) + floor(sum(x^2 + v^2) / 2), where the squares are
// floor(x^2 / 2^10). done must pulse 6 clocks after the last element.
module hamiltonian_tb;
  localparam int NS = 12;
  logic clk = 0, rst_n = 0;
  logic start, in_valid, in_last, s_neg, done;
  logic signed [15:0] x, v, h, beta;
  logic signed [23:0] jfield;
  logic signed [39:0] ham, energy;
  int checks = 0, failures = 0, t = 0, t_last;
  longint J [NS][NS];
  longint hv [NS], xv [NS], vv [NS];
  hamiltonian #(.DW(16), .FW(24), .JW(16), .EW(40), .FRAC(10)) dut (
    .clk, .rst_n, .start, .in_valid, .in_last, .x, .v, .s_neg, .jfield, .h, .beta, .done, .ham, .energy);
  always #5 clk = ~clk;
  always @(posedge clk) t <= t + 1;
  initial begin
    #300000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint e, kin, s_i, s_j, jf, eh;
    start = 0; in_valid = 0; in_last = 0; x = 0; v = 0; h = 0; jfield = 0; s_neg = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 20; p++) begin
      for (int i = 0; i < NS; i++) begin
        J[i][i] = 0;
        for (int j = i + 1; j < NS; j++) begin
          J[i][j] = (p % 2) ? fx_model_pkg::rnd_s(11) : 1024 * longint'($urandom_range(0, 2)) - 1024;
          J[j][i] = J[i][j];
        end
        hv[i] = (p % 3 == 0) ? 0 : fx_model_pkg::rnd_s(11);
        xv[i] = fx_model_pkg::rnd_s(13);
        vv[i] = fx_model_pkg::rnd_s(12);
      end
      beta = 16'($urandom_range(128, 4096));
      // reference
      e = 0; kin = 0;
      for (int i = 0; i < NS; i++) begin
        s_i = (xv[i] < 0) ? -1 : 1;
        for (int j = i + 1; j < NS; j++) begin
          s_j = (xv[j] < 0) ? -1 : 1;
          e -= J[i][j] * s_i * s_j;
        end
        e -= hv[i] * s_i;
        kin += fx_model_pkg::fmul(xv[i], xv[i], 10, 23) + fx_model_pkg::fmul(vv[i], vv[i], 10, 23);
      end
      eh = fx_model_pkg::fmul(beta, e, 10, 40) + (kin >>> 1);
      // stream
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int i = 0; i < NS; i++) begin
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        jf = 0;
        for (int j = 0; j < NS; j++) jf += J[i][j] * ((xv[j] < 0) ? -1 : 1);
        in_valid = 1; in_last = (i == NS - 1);
        x = 16'(xv[i]); v = 16'(vv[i]); s_neg = (xv[i] < 0); jfield = 24'(jf); h = 16'(hv[i]);
        if (in_last) t_last = t;
        @(negedge clk);
      end
      in_valid = 0; in_last = 0;
      while (!done) begin
        @(negedge clk);
        if (t - t_last > 20) break;
      end
      checks += 3;
      if (t - t_last != 6) begin failures++; $display("ham: done after %0d clocks", t - t_last); end
      if (longint'(energy) != e)  begin failures++; $display("ham: E got %0d exp %0d", energy, e); end
      if (longint'(ham) != eh)    begin failures++; $display("ham: H got %0d exp %0d", ham, eh); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
