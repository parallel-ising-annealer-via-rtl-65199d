// func2_tb: streams random 32-column slices of J (values in +-2 with 10
// fraction bits, and full 16-bit extremes), random sign vectors and partial
// sums, one per clock with gaps; each output must equal
// acc_in + sum_k J[k]*(sgn[k] ? -1 : +1) and out_valid must rise exactly
// 7 clocks after in_valid.
module func2_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [32*16-1:0] j_row;
  logic [31:0] sgn;
  logic signed [23:0] acc_in, field;
  logic out_valid;
  longint exp_q [$];
  int vld_t [$];
  int checks = 0, failures = 0, t = 0;
  func2 #(.LANES(32), .JW(16), .FW(24)) dut (.clk, .rst_n, .in_valid, .j_row, .sgn, .acc_in, .out_valid, .field);
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
    if (longint'(field) != e) begin failures++; $display("func2 got %0d exp %0d", field, e); end
    if (t - t0 != 7) begin failures++; $display("func2 latency %0d", t - t0); end
  end
  initial begin
    longint e, jv;
    in_valid = 0; j_row = '0; sgn = '0; acc_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      sgn = $urandom;
      acc_in = 24'(fx_model_pkg::rnd_s(20));
      e = acc_in;
      for (int k = 0; k < 32; k++) begin
        jv = (n == 5) ? -32768 : (n == 6) ? 32767 : fx_model_pkg::rnd_s(12);
        j_row[k*16 +: 16] = 16'(jv);
        e += sgn[k] ? -jv : jv;
      end
      if (in_valid) begin exp_q.push_back(e); vld_t.push_back(t); end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("func2: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
