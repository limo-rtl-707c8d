// tb_limo_controller: the controller alone, with the testbench standing in
// for the crossbar, sense amplifiers, comparator tree and schedule.
//
// The environment keeps its own spin and distance memory for five problems,
// stores what the controller writes (PRG_ROW, STO_SOLN), answers every read
// clock with the addressed row's spin and distances one clock later (like
// the sense amplifiers), and returns the lowest-distance surviving candidate
// (lowest index on ties) as the comparator tree would. The global bit is
// random per pass. With that greedy environment every pass builds the
// nearest-neighbour tour, so the test checks:
//   - the length of every visit to every state against the state table;
//   - the clocks from start to done against 80 + passes * (1 + positions *
//     (5*problems + 6*g_bit) + problems);
//   - the tours written into the spin rows and into the scratch SRAM
//     port, the best sums, and one parity toggle per problem (passes after
//     the first find no strictly shorter tour);
//   - pass count, done and busy; a run with only three problems;
//     closed loop with 16 cities and open loop
//     with 12 cities and a fixed exit city; and one VMM (AI_RD) run.
module tb_limo_controller;
  import limo_pkg::*;
  localparam int NP = 5, NC = 16, W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, mode_ai = 0, open_loop = 0;
  logic [4:0] index_count = 16;
  logic [15:0] pass_count = 3;
  logic [3:0] problem_count = 5;
  logic [NC-1:0] prg_spin, sa_spin = '0;
  logic [NC-1:0][W-1:0] dists = '0;
  logic [3:0] win_idx;
  logic [W-1:0] win_dist;
  logic win_valid, g_bit_now, g_bit = 0, exhausted = 0;
  state_t state;
  logic sub;
  logic [6:0] prg_row, ss_row, w_row, sto_row, chk_row;
  logic [NC-1:0] sto_spin, cand, sc_data;
  logic sched_init, gen, l_en, sc_we, sc_par, busy, done, vmm_valid, best_upd;
  logic [2:0] sc_prob, prob;
  logic [3:0] sc_row;
  logic [4:0] idx;
  logic [15:0] passes;
  logic [9:0] best_sum [NP];
  logic [NP-1:0] parity;

  limo_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------- environment
  logic [W-1:0]  D [NP][NC][NC];
  logic [NC-1:0] spin [NP*NC];
  logic [NC-1:0] scr [NP][2][NC];
  int            start_city [NP], exit_city [NP];

  assign prg_spin = spin[prg_row];

  always_comb begin
    win_valid = 0; win_idx = '0; win_dist = '0;
    for (int i = 0; i < NC; i++)
      if (cand[i] && (!win_valid || dists[i] < win_dist)) begin
        win_valid = 1; win_idx = 4'(i); win_dist = dists[i];
      end
  end

  logic rnd;
  always_ff @(posedge clk) rnd <= 1'($urandom);
  assign g_bit_now = rnd;

  always_ff @(posedge clk) begin
    logic rd; logic [6:0] r;
    rd = 0; r = '0;
    if (gen) g_bit <= g_bit_now;
    if (state == ST_STO_SOLN && !sub) spin[sto_row] <= sto_spin;
    if (sc_we) scr[sc_prob][sc_par][sc_row] <= sc_data;
    if (state == ST_SS_RD) begin rd = 1; r = ss_row; end
    if (state == ST_W_RD)  begin rd = 1; r = w_row; end
    if (state == ST_STO_SOLN && sub) begin rd = 1; r = chk_row; end
    if (rd) begin
      sa_spin <= spin[r];
      for (int j = 0; j < NC; j++) dists[j] <= D[int'(r) / NC][int'(r) % NC][j];
    end
  end

  // --------------------------------------------------- state length check
  state_t prev_st = ST_IDLE;
  int run_len = 0, n_len = 0, n_gen = 0, gsum = 0, n_upd = 0;
  int dur_of [9];
  initial begin
    dur_of[ST_PRG_ROW] = 80; dur_of[ST_GEN] = 1; dur_of[ST_LEN] = 6; dur_of[ST_SS_RD] = 2;
    dur_of[ST_W_RD] = 1; dur_of[ST_STO_SOLN] = 2; dur_of[ST_LAST_CITY] = 1; dur_of[ST_AI_RD] = 1;
  end
  always @(posedge clk) if (rst_n) begin
    if (state != prev_st || (state inside {ST_GEN, ST_W_RD, ST_LAST_CITY, ST_AI_RD}) ||
        (state == ST_SS_RD && run_len == 2) || (state == ST_STO_SOLN && run_len == 2)) begin
      if (prev_st != ST_IDLE)
        check(run_len == dur_of[prev_st], $sformatf("state %s lasted %0d", prev_st.name(), run_len));
      run_len = 0;
    end
    if (state != ST_IDLE) run_len++;
    prev_st = state;
    if (state == ST_LEN && sub == 0 && run_len == 1) n_len++;
    if (gen) begin n_gen++; gsum += int'(g_bit_now); end
    if (best_upd) n_upd++;
  end

  // ------------------------------------------------------------ scenario
  function automatic int nn_len(int p, int n, bit open, output int tour [NC]);
    bit used [NC];
    int cur, len, last;
    for (int i = 0; i < NC; i++) used[i] = (i >= n);
    cur = start_city[p]; used[cur] = 1; tour[0] = cur;
    if (open) used[exit_city[p]] = 1;
    last = open ? n - 1 : n;
    len = 0;
    for (int k = 1; k < last; k++) begin
      int best; best = -1;
      for (int j = 0; j < NC; j++) if (!used[j] && (best < 0 || D[p][cur][j] < D[p][cur][best])) best = j;
      len += int'(D[p][cur][best]); used[best] = 1; cur = best; tour[k] = best;
    end
    if (open) begin tour[n-1] = exit_city[p]; len += int'(D[p][cur][exit_city[p]]); end
    else len += int'(D[p][cur][start_city[p]]);
    return len;
  endfunction

  task automatic run_tsp(input bit open, input int n, input int np, input int npu);
    int t0, t_done, exp_cyc, pos;
    int tour [NC];
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) D[p][i][j] = (i == j) ? 4'd0 : 4'($urandom_range(1, 15));
      for (int r = 0; r < NC; r++) spin[p*NC + r] = '0;
      start_city[p] = $urandom_range(0, n - 1);
      do exit_city[p] = $urandom_range(0, n - 1); while (exit_city[p] == start_city[p]);
      spin[p*NC][start_city[p]] = 1;
      if (open) spin[p*NC + n - 1][exit_city[p]] = 1;
    end
    n_len = 0; n_gen = 0; gsum = 0; n_upd = 0;
    @(negedge clk); start = 1; mode_ai = 0; open_loop = open; index_count = 5'(n); pass_count = 16'(np); problem_count = 4'(npu);
    @(negedge clk); start = 0;
    t0 = int'($time);
    @(posedge done); t_done = int'($time);
    pos = (open ? n - 1 : n) - 1;
    exp_cyc = 80 + np * (1 + pos * 5 * npu + npu) + 6 * pos * gsum;
    check((t_done - t0 + 5) / 10 == exp_cyc, $sformatf("cycles %0d expected %0d", (t_done - t0 + 5) / 10, exp_cyc));
    check(n_gen == np && passes == 16'(np), $sformatf("passes %0d gens %0d", passes, n_gen));
    check(n_len == pos * gsum, $sformatf("LEN runs %0d expected %0d", n_len, pos * gsum));
    check(n_upd == npu, $sformatf("best updates %0d", n_upd));
    @(negedge clk);
    check(!busy && state == ST_IDLE, "idle after done");
    for (int p = npu; p < NP; p++) check(best_sum[p] == '1, $sformatf("p%0d beyond problem_count untouched", p));
    for (int p = 0; p < npu; p++) begin
      int len;
      len = nn_len(p, n, open, tour);
      check(int'(best_sum[p]) == len, $sformatf("p%0d best_sum %0d expected %0d", p, best_sum[p], len));
      check(parity[p] == 1'b1, $sformatf("p%0d parity", p));
      for (int k = 1; k < (open ? n - 1 : n); k++) begin
        check(spin[p*NC + k] == NC'(1) << tour[k], $sformatf("p%0d spin row %0d", p, k));
        check(scr[p][~parity[p]][k] == NC'(1) << tour[k], $sformatf("p%0d scratch row %0d", p, k));
      end
    end
  endtask

  initial begin
    #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run_tsp(0, 16, 3, 5);
    run_tsp(1, 12, 2, 5);
    run_tsp(0, 9, 4, 5);
    run_tsp(0, 14, 2, 3);
    // VMM mode: PRG_ROW then one AI_RD
    @(negedge clk); start = 1; mode_ai = 1;
    @(negedge clk); start = 0;
    repeat (80) @(negedge clk);
    check(state == ST_AI_RD, "AI_RD after programming");
    @(negedge clk);
    check(vmm_valid && done && state == ST_IDLE, "vmm_valid and done after AI_RD");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
