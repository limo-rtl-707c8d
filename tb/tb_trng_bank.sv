// tb_trng_bank: a 16-unit, 4-bit bank as used for the local words. Checks
// the read/write phase alternation (read clocks only while enabled, a write
// clock after each read), that each unit's word holds the unit bits seen in
// the last four read clocks (MSB first), that the word holds while the bank
// is disabled, and that the 4-bit words are roughly uniform over 16 values.
module tb_trng_bank;
  localparam int U = 16, B = 4;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  logic [U-1:0] bits_now;
  logic [U-1:0][B-1:0] word, expw;
  int checks = 0, failures = 0;
  int hist [16];

  trng_bank #(.UNITS(U), .BITS(B)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int g = 0; g < 400; g++) begin
      expw = '0;
      for (int c = 0; c < 2 * B; c++) begin
        @(negedge clk); en = 1; #1;
        check(dut.rd == (c % 2 == 0) && dut.wr == (c % 2 == 1), $sformatf("phase g%0d c%0d", g, c));
        if (c % 2 == 0) for (int u = 0; u < U; u++) expw[u] = {expw[u][B-2:0], bits_now[u]};
      end
      @(negedge clk); en = 0;
      check(word == expw, $sformatf("word g%0d", g));
      repeat (2) @(negedge clk);
      check(word == expw && !dut.rd && !dut.wr, "hold while disabled");
      for (int u = 0; u < U; u++) hist[word[u]]++;
    end
    // 6400 words over 16 values: 400 expected per value.
    for (int v = 0; v < 16; v++) check(hist[v] > 300 && hist[v] < 500, $sformatf("value %0d seen %0d", v, hist[v]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
