// tb_shift_add_gating: random sensed rows, random words and masks against
// an independent model: d_i gathered from the four bit planes (MSB plane at
// columns 0..15), gate r_i > d_i, survivors = mask & gate when g_bit, the
// full mask when g_bit is 0 or no candidate passes. Also measures that the
// fraction of passing gates over random words follows (15 - d) / 16.
module tb_shift_add_gating;
  localparam int N = 16, W = 4;
  logic [N*W-1:0] sa_bits;
  logic [N-1:0][W-1:0] r_local, dists;
  logic g_bit;
  logic [N-1:0] cand, gate, survive;
  logic fallback;
  int checks = 0, failures = 0;
  int pass_cnt [16];

  shift_add_gating #(.N_CITY(N), .W_BITS(W)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      logic [N-1:0] eg, es;
      logic ef;
      sa_bits = {$urandom, $urandom};
      for (int i = 0; i < N; i++) r_local[i] = W'($urandom);
      g_bit = 1'($urandom);
      cand = N'($urandom) & N'($urandom);
      if (t % 10 == 0) cand = N'(1) << ($urandom % N);
      #1;
      for (int i = 0; i < N; i++) begin
        int d;
        d = 8 * sa_bits[i] + 4 * sa_bits[16 + i] + 2 * sa_bits[32 + i] + sa_bits[48 + i];
        check(int'(dists[i]) == d, $sformatf("dist t%0d i%0d", t, i));
        eg[i] = int'(r_local[i]) > d;
        if (eg[i]) pass_cnt[d]++;
      end
      ef = g_bit && ((cand & eg) == 0) && (cand != 0);
      es = (!g_bit || ef) ? cand : (cand & eg);
      check(gate == eg && survive == es && fallback == ef, $sformatf("gating t%0d", t));
    end
    // 4000 x 16 draws spread over 16 distance values: about 4000 per value,
    // of which (15-d)/16 pass.
    for (int d = 0; d < 16; d += 5) begin
      real frac;
      frac = real'(pass_cnt[d]) / 4000.0;
      check(frac > (15.0 - d) / 16.0 - 0.06 && frac < (15.0 - d) / 16.0 + 0.06,
            $sformatf("gate probability d=%0d frac=%f", d, frac));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
