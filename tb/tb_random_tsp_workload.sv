// tb_random_tsp_workload: the random-TSP benchmark run on the full-size
// macro. Instances have N = 9, 12 and 16 cities placed uniformly in the
// unit square; Euclidean distances are quantised to 4 bits relative to the
// instance's longest edge (d = round(15 * dist / dist_max)). Each run fills
// all five problem slots and anneals with the 0.995 slope table from a
// reference word of 2000 until the schedule is exhausted.
//
// For every instance the testbench computes the exact optimum of the
// quantised problem (Held-Karp dynamic programming) and the nearest-
// neighbour tour length, and checks that
//   - the best tour read from the scratch SRAM is a valid tour whose length
//     equals best_sum,
//   - best_sum is never below the optimum and never above nearest neighbour,
//   - the run ends by exhaustion after the number of passes the slope table
//     gives for a start word of 2000 (worked out here from the table),
//   - the mean deviation ratio (best / optimum) per size stays below 1.25
//     (a loose bound on a ten-instance mean; typical values are 1.02 at
//     N = 9, 1.07 at N = 12 and 1.13 at N = 16 with this short schedule).
// It prints the deviation ratio per size, the quality figure the source
// uses for this benchmark.
module tb_random_tsp_workload;
  import limo_pkg::*;
  localparam int NP = 5, NC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, mode_ai = 0, open_loop = 0, sched_sel = 1;
  logic [4:0] index_count = 16;
  logic [15:0] pass_count = 0, r_ref_init = 2000;
  logic [3:0] problem_count = 0;
  logic [6:0] prg_row;
  logic [79:0] prg_data, vmm_in = '0;
  logic [39:0] vmm_out;
  logic vmm_valid, busy, done;
  logic [3:0] state_o;
  logic [9:0] best_sum [NP];
  logic [NP-1:0] parity;
  logic sc_re = 0;
  logic [2:0] sc_rprob = 0;
  logic [3:0] sc_rrow = 0;
  logic [15:0] sc_rdata;

  limo_macro dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int D [NP][NC][NC];
  int start_city [NP];

  always_comb begin
    prg_data = '0;
    for (int j = 0; j < NC; j++)
      for (int b = 0; b < 4; b++)
        prg_data[b*NC + j] = 1'(D[int'(prg_row) / NC][int'(prg_row) % NC][j] >> (3 - b));
    if (int'(prg_row) % NC == 0) prg_data[64 + start_city[int'(prg_row) / NC]] = 1'b1;
  end

  function automatic int held_karp(int p, int n);
    int full, best, dp [];
    full = 1 << (n - 1);                      // subsets of cities 1..n-1
    dp = new[full * n];
    foreach (dp[i]) dp[i] = 1 << 20;
    for (int j = 1; j < n; j++) dp[(1 << (j - 1)) * n + j] = D[p][0][j];
    for (int s = 1; s < full; s++)
      for (int j = 1; j < n; j++) begin
        int v;
        if (!s[j - 1]) continue;
        v = dp[s * n + j];
        if (v >= (1 << 20)) continue;
        for (int k = 1; k < n; k++)
          if (!s[k - 1] && v + D[p][j][k] < dp[(s | (1 << (k - 1))) * n + k])
            dp[(s | (1 << (k - 1))) * n + k] = v + D[p][j][k];
      end
    best = 1 << 20;
    for (int j = 1; j < n; j++) if (dp[(full - 1) * n + j] + D[p][j][0] < best) best = dp[(full - 1) * n + j] + D[p][j][0];
    return best;
  endfunction

  function automatic int nn_len(int p, int n);
    bit u [NC];
    int c, l, b;
    for (int i = 0; i < NC; i++) u[i] = (i >= n);
    c = start_city[p]; u[c] = 1; l = 0;
    for (int k = 1; k < n; k++) begin
      b = -1;
      for (int j = 0; j < NC; j++) if (!u[j] && (b < 0 || D[p][c][j] < D[p][c][b])) b = j;
      l += D[p][c][b]; u[b] = 1; c = b;
    end
    return l + D[p][c][start_city[p]];
  endfunction

  // Passes until the word falls below the next slope, from the slope table.
  function automatic int expected_passes(int w);
    int b995 [7] = '{0, 27, 57, 94, 138, 196, 277};
    int s995 [7] = '{10, 8, 7, 5, 4, 3, 2};
    int k, s;
    k = 0;
    forever begin
      s = 0;
      for (int i = 0; i < 7; i++) if (k >= b995[i]) s = s995[i];
      if (w < s) return k;
      w -= s; k++;
    end
  endfunction

  real ratio_sum [3];
  int  n_inst [3];

  task automatic run(input int n, input int slot);
    real x [NC], y [NC], dm, dd;
    int opt [NP], nn [NP];
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < n; i++) begin x[i] = real'($urandom % 10000) / 10000.0; y[i] = real'($urandom % 10000) / 10000.0; end
      dm = 0.0;
      for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
        dd = $sqrt((x[i]-x[j])*(x[i]-x[j]) + (y[i]-y[j])*(y[i]-y[j]));
        if (dd > dm) dm = dd;
      end
      for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) begin
        if (i < n && j < n && i != j) begin
          dd = $sqrt((x[i]-x[j])*(x[i]-x[j]) + (y[i]-y[j])*(y[i]-y[j]));
          D[p][i][j] = int'($floor(15.0 * dd / dm + 0.5));
        end else D[p][i][j] = (i == j) ? 0 : 15;
      end
      start_city[p] = $urandom_range(0, n - 1);
      opt[p] = held_karp(p, n);
      nn[p] = nn_len(p, n);
    end
    @(negedge clk); start = 1; index_count = 5'(n);
    @(negedge clk); start = 0;
    @(posedge done); @(negedge clk);
    check(dut.u_sched.exhausted && int'(dut.passes) == expected_passes(2000),
          $sformatf("N=%0d ended after %0d passes, table gives %0d", n, dut.passes, expected_passes(2000)));
    for (int p = 0; p < NP; p++) begin
      bit seen [NC];
      int c, l, nxt;
      bit ok;
      ok = 1; l = 0;
      for (int i = 0; i < NC; i++) seen[i] = (i >= n);
      c = start_city[p]; seen[c] = 1;
      for (int r = 1; r < n; r++) begin
        @(negedge clk); sc_re = 1; sc_rprob = 3'(p); sc_rrow = 4'(r);
        @(negedge clk); sc_re = 0;
        nxt = -1;
        for (int i = 0; i < NC; i++) if (sc_rdata[i]) nxt = i;
        if (nxt < 0 || !$onehot(sc_rdata) || seen[nxt]) ok = 0;
        else begin seen[nxt] = 1; l += D[p][c][nxt]; c = nxt; end
      end
      l += D[p][c][start_city[p]];
      check(ok && l == int'(best_sum[p]), $sformatf("N=%0d p%0d scratch tour length %0d best_sum %0d", n, p, l, best_sum[p]));
      check(int'(best_sum[p]) >= opt[p] && int'(best_sum[p]) <= nn[p],
            $sformatf("N=%0d p%0d best %0d optimum %0d nearest-neighbour %0d", n, p, best_sum[p], opt[p], nn[p]));
      ratio_sum[slot] += real'(best_sum[p]) / real'(opt[p]);
      n_inst[slot]++;
    end
  endtask

  initial begin
    #200000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    static int sizes [3] = '{9, 12, 16};
    repeat (3) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      ratio_sum[s] = 0.0; n_inst[s] = 0;
      repeat (2) run(sizes[s], s);
      $display("N=%0d: %0d instances, mean deviation ratio %f", sizes[s], n_inst[s], ratio_sum[s] / n_inst[s]);
      check(ratio_sum[s] / n_inst[s] < 1.25, $sformatf("N=%0d mean deviation ratio", sizes[s]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
