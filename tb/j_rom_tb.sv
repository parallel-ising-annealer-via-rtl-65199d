// j_rom_tb: fills a reduced coupling memory (N = 40, two slices per row) with
// words derived from a hash of the address, reads every word back in a random
// order and checks the data one clock after the address, then overwrites a
// few words and checks that only those changed.
module j_rom_tb;
  localparam int N = 40, LANES = 32, JW = 16, C = 2, DEPTH = N * C, AW = $clog2(DEPTH);
  logic clk = 0;
  logic wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [LANES*JW-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  j_rom #(.N(N), .LANES(LANES), .JW(JW)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [LANES*JW-1:0] pat(input int a, input int salt);
    logic [LANES*JW-1:0] w;
    for (int k = 0; k < LANES; k++) w[k*JW +: JW] = 16'((a * 7919 + k * 104729 + salt * 31) ^ (k << 9));
    return w;
  endfunction
  initial begin
    int a;
    wr_en = 0; rd_addr = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = pat(i, 0);
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      a = $urandom_range(0, DEPTH - 1);
      rd_addr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== pat(a, 0)) begin failures++; $display("j_rom word %0d wrong", a); end
      @(negedge clk);
    end
    for (int i = 0; i < DEPTH; i += 9) begin
      @(negedge clk); wr_en = 1; wr_addr = AW'(i); wr_data = pat(i, 1);
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < DEPTH; i++) begin
      rd_addr = AW'(i);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== pat(i, (i % 9 == 0) ? 1 : 0)) begin failures++; $display("j_rom word %0d wrong after rewrite", i); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
