// tb_stt_trng_cell: cycles the cell through read and write phases (20 ns per
// bit) and checks the complementary outputs, that the output holds while
// RD is low, and that over 4000 bits both the fraction of ones and the
// fraction of bit-to-bit changes are near one half.
module tb_stt_trng_cell;
  logic rd = 0, write = 0, out, out_b;
  int checks = 0, failures = 0;
  int ones = 0, flips = 0;
  logic prev;

  stt_trng_cell dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      logic held;
      #5 rd = 1;
      #5;
      check(out_b == ~out, "complementary outputs");
      held = out;
      rd = 0;
      write = 1;
      #10 write = 0;
      #1;
      if (t % 100 == 0) check(out == held, "output holds with RD low");
      if (out) ones++;
      if (t > 0 && out != prev) flips++;
      prev = out;
    end
    check(ones > 1800 && ones < 2200, $sformatf("ones %0d of 4000", ones));
    check(flips > 1800 && flips < 2200, $sformatf("changes %0d of 3999", flips));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
