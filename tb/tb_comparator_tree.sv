// tb_comparator_tree: random distances and valid masks against a linear
// search for the smallest valid distance (lowest index on ties), plus the
// all-invalid case.
module tb_comparator_tree;
  localparam int N = 16, W = 4;
  logic [N-1:0][W-1:0] dists;
  logic [N-1:0] valid_in;
  logic [$clog2(N)-1:0] win_idx;
  logic [W-1:0] win_dist;
  logic valid;
  int checks = 0, failures = 0;

  comparator_tree #(.N(N), .W(W)) dut (.*);

  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int best, bi;
      for (int i = 0; i < N; i++) dists[i] = W'($urandom % ((t % 3 == 0) ? 3 : 16));
      valid_in = N'($urandom);
      if (t % 50 == 0) valid_in = '0;
      if (t % 50 == 1) valid_in = N'(1) << ($urandom % N);
      #1;
      best = 99; bi = 0;
      for (int i = 0; i < N; i++) if (valid_in[i] && int'(dists[i]) < best) begin best = int'(dists[i]); bi = i; end
      checks++;
      if (valid != (valid_in != 0) || (valid && (int'(win_idx) != bi || int'(win_dist) != best))) begin
        failures++; $display("FAIL t%0d mask %h got %0d/%0d exp %0d/%0d", t, valid_in, win_idx, win_dist, bi, best);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
