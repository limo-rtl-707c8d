// tb_limo_macro: end-to-end test of the LIMO macro at its default size
// (five 16-city problems, 80x80 crossbar), with no parameter overrides.
//
// The testbench programs the crossbar row by row through prg_row/prg_data
// and keeps its own copy of the distance matrices. While the macro anneals,
// a reference model follows every city choice: from the previous city, the
// remaining candidates, the global bit and the local random words actually
// drawn by the macro's TRNGs, it predicts the winner (survivors of
// [r_i > d_i], all candidates when the global bit is 0 or none survive,
// then the smallest distance, lowest index on ties) and compares it with
// the spin written to the crossbar. It also recomputes each tour length,
// the best sum after every LAST_CITY, the pass length in clocks
// (1 + positions * (5*problems + 6*g_bit) + problems) and the total run length, reads the
// best tours back from the scratch SRAM and checks they are valid tours of
// the reported length. In VMM mode it checks every output bit against the
// sign of the ternary dot product and the one-clock latency.
//
// Runs: (1) closed loop, 16 cities, r_ref_init = 0: one purely greedy pass,
// the schedule is exhausted at once; (2) closed loop, 16 cities, 0.995
// table from 0.2*2^16, 80 passes; (3) open loop, 12 cities, 0.9995 table,
// 30 passes; (4) a short 0.995 run from 120 that ends by exhaustion;
// (6) eight VMMs. Every mechanism named by the paper and exercised here
// is counted and must occur at least once.
module tb_limo_macro;
  import limo_pkg::*;
  localparam int NP = 5, NC = 16, W = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, mode_ai = 0, open_loop = 0, sched_sel = 0;
  logic [4:0] index_count = 16;
  logic [15:0] pass_count = 1, r_ref_init = 0;
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
    if (!ok) begin failures++; if (failures < 40) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------- programmed data
  logic [W-1:0]  D [NP][NC][NC];
  logic [NC-1:0] spin_init [NP*NC];
  int            wt [80][40];           // ternary weights for VMM
  bit            ai_data;
  int            start_city [NP], exit_city [NP];

  always_comb begin
    prg_data = '0;
    if (!ai_data) begin
      for (int j = 0; j < NC; j++)
        for (int b = 0; b < W; b++)
          prg_data[b*NC + j] = D[int'(prg_row) / NC][int'(prg_row) % NC][j][W-1-b];
      prg_data[64 +: NC] = spin_init[prg_row];
    end else begin
      for (int k = 0; k < 40; k++) begin
        prg_data[2*k]   = (wt[prg_row][k] == -1);
        prg_data[2*k+1] = (wt[prg_row][k] == 1);
      end
    end
  end

  // --------------------------------------------------------- mechanisms
  int m_greedy_pass, m_stoch_pass, m_len, m_gate_filtered, m_fallback, m_best_upd,
      m_no_improve, m_exhausted, m_pass_limit, m_vmm, m_open_close, m_closed_close, m_scratch_tour, m_partial;

  // ------------------------------------------------------ reference model
  bit open_r;
  int ncity_r, nprob_r = NP;
  bit used [NP][NC];
  int cur [NP], len [NP], tb_best [NP];
  int tour [NP][NC];
  int pend_p = -1;
  int gen_t = -1, g_prev = 0, pass_no = 0;

  always @(posedge clk) if (rst_n && !ai_data) begin
    state_t st;
    int p, k, pos;
    st = state_t'(state_o);
    p = int'(dut.cur_prob);
    k = int'(dut.cur_idx);
    pos = (open_r ? ncity_r - 1 : ncity_r) - 1;
    if (pend_p >= 0) begin
      check(int'(best_sum[pend_p]) == tb_best[pend_p], $sformatf("best_sum p%0d %0d exp %0d", pend_p, best_sum[pend_p], tb_best[pend_p]));
      pend_p = -1;
    end
    if (st == ST_GEN) begin
      if (gen_t >= 0) begin
        int exp_len;
        exp_len = 1 + pos * (5 * nprob_r + 6 * g_prev) + nprob_r;
        check((int'($time) - gen_t) / 10 == exp_len, $sformatf("pass %0d took %0d clocks exp %0d", pass_no, (int'($time) - gen_t) / 10, exp_len));
      end
      gen_t = int'($time);
      g_prev = int'(dut.g_bit_now);
      if (dut.g_bit_now) m_stoch_pass++; else m_greedy_pass++;
      pass_no++;
      for (int q = 0; q < NP; q++) begin
        for (int i = 0; i < NC; i++) used[q][i] = (i >= ncity_r);
        used[q][start_city[q]] = 1;
        if (open_r) used[q][exit_city[q]] = 1;
        cur[q] = start_city[q]; len[q] = 0; tour[q][0] = start_city[q];
      end
    end
    if (st == ST_LEN && dut.sub == 0 && dut.u_ctrl.cnt == 0) m_len++;
    if (st == ST_STO_SOLN && dut.sub == 0) begin
      logic [NC-1:0] cm, gt, sv;
      int best;
      logic gb;
      gb = dut.u_sched.g_bit;
      cm = '0; gt = '0;
      for (int i = 0; i < NC; i++) begin
        cm[i] = !used[p][i];
        gt[i] = dut.u_ltrng.word[i] > D[p][cur[p]][i];
      end
      check(dut.u_ctrl.cand == cm, $sformatf("candidate mask p%0d pos%0d", p, k));
      sv = gb ? (cm & gt) : cm;
      if (gb && sv != '0 && sv != cm) m_gate_filtered++;
      if (gb && sv == '0) begin sv = cm; m_fallback++; end
      best = -1;
      for (int i = 0; i < NC; i++) if (sv[i] && (best < 0 || D[p][cur[p]][i] < D[p][cur[p]][best])) best = i;
      check(best >= 0 && dut.u_xbar.wwl[p*NC + k - 1] && dut.u_drv.wbl[64 +: NC] == NC'(1) << best,
            $sformatf("choice p%0d pos%0d exp city %0d got %b", p, k, best, dut.u_drv.wbl[64 +: NC]));
      if (best >= 0) begin
        len[p] += int'(D[p][cur[p]][best]); used[p][best] = 1; cur[p] = best; tour[p][k - 1] = best;
      end
    end
    if (st == ST_LAST_CITY) begin
      int cl;
      cl = open_r ? exit_city[p] : start_city[p];
      if (open_r) m_open_close++; else m_closed_close++;
      len[p] += int'(D[p][cur[p]][cl]);
      if (len[p] < tb_best[p]) begin tb_best[p] = len[p]; m_best_upd++; end
      else m_no_improve++;
      pend_p = p;
    end
  end

  // ------------------------------------------------------------ helpers
  function automatic int nn_len(int p);
    bit u [NC];
    int c, l, last, b;
    for (int i = 0; i < NC; i++) u[i] = (i >= ncity_r);
    c = start_city[p]; u[c] = 1;
    if (open_r) u[exit_city[p]] = 1;
    last = open_r ? ncity_r - 1 : ncity_r;
    l = 0;
    for (int k = 1; k < last; k++) begin
      b = -1;
      for (int j = 0; j < NC; j++) if (!u[j] && (b < 0 || D[p][c][j] < D[p][c][b])) b = j;
      l += int'(D[p][c][b]); u[b] = 1; c = b;
    end
    return l + int'(D[p][c][open_r ? exit_city[p] : start_city[p]]);
  endfunction

  task automatic read_scratch_tours();
    for (int p = 0; p < nprob_r; p++) begin
      bit seen [NC];
      int c, l, last;
      bit ok;
      ok = 1;
      for (int i = 0; i < NC; i++) seen[i] = (i >= ncity_r);
      c = start_city[p]; seen[c] = 1;
      if (open_r) seen[exit_city[p]] = 1;
      last = open_r ? ncity_r - 1 : ncity_r;
      l = 0;
      for (int r = 1; r < last; r++) begin
        int nxt;
        @(negedge clk); sc_re = 1; sc_rprob = 3'(p); sc_rrow = 4'(r);
        @(negedge clk); sc_re = 0;
        nxt = -1;
        for (int i = 0; i < NC; i++) if (sc_rdata[i]) nxt = i;
        if (nxt < 0 || !$onehot(sc_rdata) || seen[nxt]) ok = 0;
        else begin seen[nxt] = 1; l += int'(D[p][c][nxt]); c = nxt; end
      end
      if (ok) l += int'(D[p][c][open_r ? exit_city[p] : start_city[p]]);
      for (int i = 0; i < NC; i++) if (!seen[i]) ok = 0;
      check(ok && l == int'(best_sum[p]), $sformatf("scratch tour p%0d valid=%0d len %0d best_sum %0d", p, ok, l, best_sum[p]));
      if (ok) m_scratch_tour++;
    end
  endtask

  task automatic anneal(input bit open, input int n, input bit sched, input int rref, input int np,
                        input bit expect_exhaust, input int npu = NP);
    int t0, pos, nn [NP];
    ai_data = 0;
    for (int p = 0; p < NP; p++) begin
      for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) D[p][i][j] = (i == j) ? 4'd0 : 4'($urandom_range(1, 15));
      for (int r = 0; r < NC; r++) spin_init[p*NC + r] = NC'($urandom);   // stale spins must not matter
      start_city[p] = $urandom_range(0, n - 1);
      do exit_city[p] = $urandom_range(0, n - 1); while (exit_city[p] == start_city[p]);
      spin_init[p*NC] = NC'(1) << start_city[p];
      if (open) spin_init[p*NC + n - 1] = NC'(1) << exit_city[p];
      tb_best[p] = 1023;
    end
    open_r = open; ncity_r = n; nprob_r = npu; gen_t = -1; pass_no = 0;
    @(negedge clk);
    start = 1; mode_ai = 0; open_loop = open; index_count = 5'(n); sched_sel = sched;
    r_ref_init = 16'(rref); pass_count = 16'(np); problem_count = (npu == NP) ? 4'd0 : 4'(npu);
    @(negedge clk); start = 0;
    t0 = int'($time);
    check(state_o == ST_PRG_ROW && busy, "programming starts after start");
    @(posedge done);
    @(negedge clk);
    pos = (open ? n - 1 : n) - 1;
    check(pass_no == int'(dut.passes), $sformatf("passes seen %0d reported %0d", pass_no, dut.passes));
    if (expect_exhaust) begin
      check(dut.u_sched.exhausted && int'(dut.passes) < np, "run ended by schedule exhaustion");
      if (dut.u_sched.exhausted && int'(dut.passes) < np) m_exhausted++;
    end else begin
      check(int'(dut.passes) == np, $sformatf("pass limit: %0d passes", dut.passes));
      if (int'(dut.passes) == np) m_pass_limit++;
    end
    // last pass length (not followed by a GEN)
    check((int'($time) - gen_t + 5) / 10 == 1 + pos * (5 * nprob_r + 6 * g_prev) + nprob_r, $sformatf("last pass length %0d", (int'($time) - gen_t + 5) / 10));
    check(!busy && state_o == ST_IDLE, "idle after done");
    for (int p = npu; p < NP; p++) check(best_sum[p] == '1, $sformatf("p%0d beyond problem_count untouched", p));
    for (int p = 0; p < npu; p++) begin
      nn [p] = nn_len(p);
      if (rref == 0) check(int'(best_sum[p]) == nn[p], $sformatf("greedy p%0d best %0d nearest-neighbour %0d", p, best_sum[p], nn[p]));
      else if (m_greedy_pass > 0) check(int'(best_sum[p]) <= nn[p], $sformatf("p%0d best %0d worse than greedy %0d", p, best_sum[p], nn[p]));
      check(int'(best_sum[p]) == tb_best[p], $sformatf("final best p%0d", p));
    end
    read_scratch_tours();
    if (npu < NP) m_partial++;
  endtask

  task automatic vmm_run();
    ai_data = 1;
    for (int r = 0; r < 80; r++) for (int k = 0; k < 40; k++) wt[r][k] = $urandom_range(0, 2) - 1;
    @(negedge clk); start = 1; mode_ai = 1;
    @(negedge clk); start = 0; mode_ai = 0;
    vmm_in = 80'({$urandom, $urandom, $urandom});
    repeat (80) @(negedge clk);
    check(state_o == ST_AI_RD, "AI_RD follows programming");
    @(negedge clk);
    check(vmm_valid && done, "vmm_valid one clock after AI_RD");
    for (int k = 0; k < 40; k++) begin
      int s;
      s = 0;
      for (int r = 0; r < 80; r++) if (vmm_in[r]) s += wt[r][k];
      check(vmm_out[k] == (s > 0), $sformatf("vmm bit %0d sum %0d got %0d", k, s, vmm_out[k]));
    end
    if (vmm_valid) m_vmm++;
    ai_data = 0;
  endtask

  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ai_data = 0;
    for (int p = 0; p < NP; p++) begin
      start_city[p] = 0; exit_city[p] = 1;
      for (int r = 0; r < NC; r++) spin_init[p*NC + r] = '0;
      for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) D[p][i][j] = '0;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    anneal(0, 16, 1, 0, 5, 1);           // greedy, ends at once by exhaustion
    anneal(0, 16, 1, 13107, 80, 0);      // 0.995 schedule from 0.2 * 2^16
    anneal(1, 12, 0, 30000, 30, 0);      // open loop, 0.9995 schedule
    anneal(0, 10, 1, 120, 200, 1);       // exhausts after a few passes
    anneal(0, 13, 1, 2000, 12, 0, 2);    // only two problems annealed
    repeat (8) vmm_run();
    check(m_greedy_pass > 0,   "mechanism: pass with global bit 0 (greedy)");
    check(m_stoch_pass > 0,    "mechanism: pass with global bit 1");
    check(m_len > 0,           "mechanism: LEN local random words");
    check(m_gate_filtered > 0, "mechanism: local gates removed candidates");
    check(m_fallback > 0,      "mechanism: no survivor, all candidates kept");
    check(m_best_upd > 0,      "mechanism: best tour update / parity flip");
    check(m_no_improve > 0,    "mechanism: tour not shorter, best kept");
    check(m_exhausted > 0,     "mechanism: schedule exhaustion");
    check(m_pass_limit > 0,    "mechanism: pass limit");
    check(m_open_close > 0,    "mechanism: open loop closing to exit city");
    check(m_closed_close > 0,  "mechanism: closed loop closing to start city");
    check(m_scratch_tour > 0,  "mechanism: best tour read from scratch SRAM");
    check(m_vmm > 0,           "mechanism: VMM (AI_RD)");
    check(m_partial > 0,       "mechanism: fewer problems than slots");
    $display("mechanisms: greedy %0d stochastic %0d LEN %0d filtered %0d fallback %0d best-update %0d no-improve %0d exhausted %0d limit %0d open %0d closed %0d scratch %0d vmm %0d",
             m_greedy_pass, m_stoch_pass, m_len, m_gate_filtered, m_fallback, m_best_upd, m_no_improve,
             m_exhausted, m_pass_limit, m_open_close, m_closed_close, m_scratch_tour, m_vmm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
