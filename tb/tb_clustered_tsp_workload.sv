// tb_clustered_tsp_workload: a TSP larger than one macro, solved by the
// divide-and-conquer flow in which the macro is the cluster solver.
//
// The macro holds at most 16 cities per problem, so larger instances are cut
// into clusters by a host. This testbench plays the host with a one-level,
// simplified version of that flow (the host side is not part of the RTL):
//   1. 80 cities uniform in the unit square are split by recursive bisection
//      along the principal axis of each subset (PCA), at the median, until
//      every cluster holds at most 16 cities (here 8 clusters of 10). The
//      median cut is this testbench's simplification of a variance-maximising
//      cut;
//   2. the order of the clusters is a closed tour over their centroids,
//      solved on the macro as an 8-city problem (one problem slot);
//   3. for each pair of consecutive clusters (A, B) the closest pair of
//      cities a in A, b in B becomes exit(A) and entry(B), with an entry and
//      exit of the same cluster kept distinct;
//   4. every cluster is solved on the macro as an open problem from its
//      entry to its exit, five clusters per run (then three, with
//      problem_count = 3);
//   5. the sub-paths are stitched into one tour. No 2-opt refinement.
// Distances of each problem are quantised to 4 bits relative to its longest
// edge; every run uses the 0.995 table from a reference word of 2000.
//
// Checks: every best tour read from the scratch SRAM is a valid path of the
// reported length, from the right entry to the right exit; the stitched
// tour visits each of the 80 cities once; its Euclidean length is within
// 1.5x of a nearest-neighbour tour over all 80 cities (a loose bound; the
// ratio is printed). The clustered flow is repeated on three instances.
module tb_clustered_tsp_workload;
  import limo_pkg::*;
  localparam int NP = 5, NC = 16;
  localparam int NT = 80, NK = 8, CS = NT / NK;
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

  // ------------------------------------------------------ macro problems
  int D [NP][NC][NC];
  int first_city [NP], last_city [NP];

  always_comb begin
    prg_data = '0;
    for (int j = 0; j < NC; j++)
      for (int b = 0; b < 4; b++)
        prg_data[b*NC + j] = 1'(D[int'(prg_row) / NC][int'(prg_row) % NC][j] >> (3 - b));
    if (int'(prg_row) % NC == 0) prg_data[64 + first_city[int'(prg_row) / NC]] = 1'b1;
    if (open_loop && int'(prg_row) % NC == int'(index_count) - 1)
      prg_data[64 + last_city[int'(prg_row) / NC]] = 1'b1;
  end

  real px [NT], py [NT];

  function automatic real edist(int a, int b);
    return $sqrt((px[a]-px[b])*(px[a]-px[b]) + (py[a]-py[b])*(py[a]-py[b]));
  endfunction

  // Load slot p with the quantised distances between points xs/ys[0..n-1].
  task automatic load_problem(int p, int n, real xs [NC], real ys [NC]);
    real dm, dd;
    dm = 1e-9;
    for (int i = 0; i < n; i++) for (int j = 0; j < n; j++) begin
      dd = $sqrt((xs[i]-xs[j])*(xs[i]-xs[j]) + (ys[i]-ys[j])*(ys[i]-ys[j]));
      if (dd > dm) dm = dd;
    end
    for (int i = 0; i < NC; i++) for (int j = 0; j < NC; j++) begin
      if (i < n && j < n && i != j) begin
        dd = $sqrt((xs[i]-xs[j])*(xs[i]-xs[j]) + (ys[i]-ys[j])*(ys[i]-ys[j]));
        D[p][i][j] = int'($floor(15.0 * dd / dm + 0.5));
      end else D[p][i][j] = (i == j) ? 0 : 15;
    end
  endtask

  // Run the loaded slots; read back each best tour as local indices.
  task automatic run_slots(input bit open, input int n, input int np, output int seq [NP][NC]);
    @(negedge clk); start = 1; open_loop = open; index_count = 5'(n); problem_count = 4'(np);
    @(negedge clk); start = 0;
    @(posedge done); @(negedge clk);
    for (int p = 0; p < np; p++) begin
      bit seen [NC];
      int c, l, nxt, rows;
      bit ok;
      ok = 1; l = 0;
      for (int i = 0; i < NC; i++) seen[i] = (i >= n);
      c = first_city[p]; seen[c] = 1; seq[p][0] = c;
      if (open) seen[last_city[p]] = 1;
      rows = open ? n - 2 : n - 1;
      for (int r = 1; r <= rows; r++) begin
        @(negedge clk); sc_re = 1; sc_rprob = 3'(p); sc_rrow = 4'(r);
        @(negedge clk); sc_re = 0;
        nxt = -1;
        for (int i = 0; i < NC; i++) if (sc_rdata[i]) nxt = i;
        if (nxt < 0 || !$onehot(sc_rdata) || seen[nxt]) ok = 0;
        else begin seen[nxt] = 1; l += D[p][c][nxt]; c = nxt; seq[p][r] = nxt; end
      end
      if (open) begin seq[p][n - 1] = last_city[p]; l += D[p][c][last_city[p]]; end
      else l += D[p][c][first_city[p]];
      check(ok && l == int'(best_sum[p]),
            $sformatf("%s problem %0d: scratch path length %0d, best_sum %0d", open ? "cluster" : "centroid", p, l, best_sum[p]));
    end
  endtask

  // ----------------------------------------------------------- the host
  int members [NK][CS];
  int nclu;

  // Recursive median bisection along the principal axis.
  task automatic bisect(int idx [], int n);
    real mx, my, sxx, syy, sxy, th, vx, vy, s [];
    int ord [], a [], b [];
    if (n <= NC) begin
      for (int i = 0; i < n; i++) members[nclu][i] = idx[i];
      nclu++;
      return;
    end
    mx = 0; my = 0;
    for (int i = 0; i < n; i++) begin mx += px[idx[i]]; my += py[idx[i]]; end
    mx /= n; my /= n;
    sxx = 0; syy = 0; sxy = 0;
    for (int i = 0; i < n; i++) begin
      sxx += (px[idx[i]]-mx)*(px[idx[i]]-mx); syy += (py[idx[i]]-my)*(py[idx[i]]-my);
      sxy += (px[idx[i]]-mx)*(py[idx[i]]-my);
    end
    th = 0.5 * $atan2(2.0 * sxy, sxx - syy);      // angle of the dominant eigenvector
    vx = $cos(th); vy = $sin(th);
    s = new[n]; ord = new[n];
    for (int i = 0; i < n; i++) begin s[i] = vx * px[idx[i]] + vy * py[idx[i]]; ord[i] = i; end
    for (int i = 1; i < n; i++)                   // insertion sort of the projections
      for (int j = i; j > 0 && s[ord[j]] < s[ord[j-1]]; j--) begin
        int t; t = ord[j]; ord[j] = ord[j-1]; ord[j-1] = t;
      end
    a = new[n / 2]; b = new[n - n / 2];
    for (int i = 0; i < n / 2; i++) a[i] = idx[ord[i]];
    for (int i = n / 2; i < n; i++) b[i - n / 2] = idx[ord[i]];
    bisect(a, n / 2);
    bisect(b, n - n / 2);
  endtask

  function automatic real nn_tour();
    bit u [NT];
    int c, bst;
    real l;
    foreach (u[i]) u[i] = 0;
    c = 0; u[0] = 1; l = 0;
    for (int k = 1; k < NT; k++) begin
      bst = -1;
      for (int j = 0; j < NT; j++) if (!u[j] && (bst < 0 || edist(c, j) < edist(c, bst))) bst = j;
      l += edist(c, bst); u[bst] = 1; c = bst;
    end
    return l + edist(c, 0);
  endfunction

  real ratio_sum = 0.0;

  task automatic instance_run(int inst);
    int all [], order [NK], entry [NK], ext [NK], seq [NP][NC], tour [NT], nt;
    real xs [NC], ys [NC], len;
    bit seen [NT];
    for (int i = 0; i < NT; i++) begin px[i] = real'($urandom % 10000) / 10000.0; py[i] = real'($urandom % 10000) / 10000.0; end
    all = new[NT];
    foreach (all[i]) all[i] = i;
    nclu = 0;
    bisect(all, NT);
    check(nclu == NK, "cluster count");

    // cluster order: closed tour over the centroids, on the macro
    for (int k = 0; k < NK; k++) begin
      xs[k] = 0; ys[k] = 0;
      for (int i = 0; i < CS; i++) begin xs[k] += px[members[k][i]] / CS; ys[k] += py[members[k][i]] / CS; end
    end
    load_problem(0, NK, xs, ys);
    first_city[0] = 0; last_city[0] = 0;
    run_slots(0, NK, 1, seq);
    for (int k = 0; k < NK; k++) order[k] = seq[0][k];

    // entry/exit binding: closest pair between consecutive clusters
    for (int k = 0; k < NK; k++) begin entry[k] = -1; ext[k] = -1; end
    for (int k = 0; k < NK; k++) begin
      int A, B, ba, bb;
      A = order[k]; B = order[(k + 1) % NK];
      ba = -1; bb = -1;
      for (int i = 0; i < CS; i++) for (int j = 0; j < CS; j++) begin
        if (i == entry[A]) continue;
        if (j == ext[B]) continue;
        if (ba < 0 || edist(members[A][i], members[B][j]) < edist(members[A][ba], members[B][bb])) begin ba = i; bb = j; end
      end
      ext[A] = ba; entry[B] = bb;
    end

    // open solves of the clusters, five per run
    nt = 0;
    for (int base = 0; base < NK; base += NP) begin
      int np;
      np = (NK - base < NP) ? NK - base : NP;
      for (int p = 0; p < np; p++) begin
        int c;
        c = order[base + p];
        for (int i = 0; i < NC; i++) begin xs[i] = 0; ys[i] = 0; end
        for (int i = 0; i < CS; i++) begin xs[i] = px[members[c][i]]; ys[i] = py[members[c][i]]; end
        load_problem(p, CS, xs, ys);
        first_city[p] = entry[c]; last_city[p] = ext[c];
      end
      run_slots(1, CS, np, seq);
      for (int p = 0; p < np; p++) begin
        check(seq[p][0] == entry[order[base + p]] && seq[p][CS - 1] == ext[order[base + p]], "path runs from entry to exit");
        for (int i = 0; i < CS; i++) begin tour[nt] = members[order[base + p]][seq[p][i]]; nt++; end
      end
    end

    // stitched tour
    foreach (seen[i]) seen[i] = 0;
    for (int i = 0; i < NT; i++) seen[tour[i]] = 1;
    begin
      bit all_seen;
      all_seen = 1;
      foreach (seen[i]) all_seen &= seen[i];
      check(nt == NT && all_seen, "stitched tour visits every city once");
    end
    len = 0;
    for (int i = 0; i < NT; i++) len += edist(tour[i], tour[(i + 1) % NT]);
    $display("instance %0d: clustered tour %f, nearest neighbour %f, ratio %f", inst, len, nn_tour(), len / nn_tour());
    check(len < 1.5 * nn_tour(), "clustered tour within 1.5x of nearest neighbour");
    ratio_sum += len / nn_tour();
  endtask

  initial begin
    #200000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) instance_run(i);
    $display("mean clustered / nearest-neighbour ratio %f", ratio_sum / 3.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
