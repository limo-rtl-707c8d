// tb_anneal_schedule: loads a reference word, issues GEN pulses and checks,
// against an independently written copy of both slope tables, the word
// after every pass, the registered global bit ([r_g < r_ref] before the
// decrement), the pass count and the exhaustion flag. Runs the 0.995 table
// to exhaustion from 2000 and the 0.9995 table from floor(0.2 * 2^16).
module tb_anneal_schedule;
  import limo_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, gen = 0;
  always #5 clk = ~clk;
  logic [15:0] r_ref_init = 0, r_g = 0, r_ref, pass_cnt;
  sched_t sched = SCHED_995;
  logic g_bit_now, g_bit, exhausted;
  int checks = 0, failures = 0;
  int ones = 0;

  anneal_schedule dut (.*);

  // Slope tables as (first pass of interval, slope).
  function automatic int ref_slope(bit fast, int pass);
    int b9995 [8] = '{0, 267, 575, 940, 1386, 1961, 2772, 4158};
    int s9995 [8] = '{10, 8, 7, 5, 4, 3, 2, 1};
    int b995  [7] = '{0, 27, 57, 94, 138, 196, 277};
    int s995  [7] = '{10, 8, 7, 5, 4, 3, 2};
    int s;
    s = 0;
    if (!fast) begin for (int i = 0; i < 8; i++) if (pass >= b9995[i]) s = s9995[i]; end
    else       begin for (int i = 0; i < 7; i++) if (pass >= b995[i])  s = s995[i];  end
    return s;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input bit fast, input int start_val, input int max_pass);
    int model, p;
    @(negedge clk); sched = fast ? SCHED_995 : SCHED_9995; r_ref_init = 16'(start_val); init = 1;
    @(negedge clk); init = 0;
    model = start_val; p = 0;
    while (model >= ref_slope(fast, p) && p < max_pass) begin
      check(!exhausted && r_ref == 16'(model), $sformatf("word pass %0d got %0d exp %0d", p, r_ref, model));
      r_g = 16'($urandom);
      gen = 1;
      @(negedge clk); gen = 0;
      check(g_bit == (int'(r_g) < model), $sformatf("g_bit pass %0d", p));
      if (g_bit) ones++;
      model -= ref_slope(fast, p);
      p++;
      check(int'(pass_cnt) == p, "pass count");
    end
    if (p < max_pass) check(exhausted == 1'b1, $sformatf("exhausted after %0d passes", p));
  endtask

  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(1'b1, 2000, 100000);
    ones = 0;
    run(1'b0, 13107, 100000);
    // A word of 13107 over ~2250 passes averages p ~ 0.08: expect some
    // gate hits and far fewer than half.
    check(ones > 40 && ones < 600, $sformatf("global gate hits %0d", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
