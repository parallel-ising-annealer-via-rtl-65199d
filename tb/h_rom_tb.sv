// h_rom_tb: writes all N = 200 fields with random values, reads them back in
// random order with one clock latency, and checks that a read in the same
// clock as a write to another address returns the stored value.
module h_rom_tb;
  localparam int N = 200, JW = 16, AW = $clog2(N);
  logic clk = 0;
  logic wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic signed [JW-1:0] wr_data, rd_data;
  logic signed [JW-1:0] model [N];
  int checks = 0, failures = 0;
  h_rom #(.N(N), .JW(JW)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int a, b;
    wr_en = 0; rd_addr = '0;
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = JW'($urandom); model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      a = $urandom_range(0, N - 1);
      b = (a + 1 + $urandom_range(0, N - 2)) % N;
      rd_addr = AW'(a);
      wr_en = (n % 4 == 0); wr_addr = AW'(b); wr_data = JW'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("h_rom %0d got %0d exp %0d", a, rd_data, model[a]); end
      if (wr_en) model[b] = wr_data;
      @(negedge clk); wr_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
