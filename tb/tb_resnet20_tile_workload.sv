// tb_resnet20_tile_workload: one Resnet20 convolution tile computed on the
// macro in VMM mode, with 3-bit weights and activations and 1-bit partial
// sums, as the network is run on the crossbar.
//
// Layer: a stage-1 3x3 convolution of Resnet20 (16 input channels, 16
// output channels, the layer shape of the standard network) evaluated on a
// 6x6 patch of the feature map, giving 4x4 output pixels with no padding.
// The paper fixes 3-bit weights and activations and a sign-only partial sum
// with a per-column scale; how a layer is cut into crossbar tiles is this
// testbench's choice and works as follows:
//   - the 144 inputs of one output pixel (16 channels x 9 taps) are split
//     into two row tiles of 72 rows (channels 0-7 and 8-15); rows 72-79
//     hold zero weights;
//   - a signed 3-bit weight w in [-3, 3] is written as two ternary slices,
//     w = 2*t1 + t0 with t_s = sign(w) * bit s of |w|; output channel c
//     uses column pairs 2c (t0) and 2c+1 (t1), so pairs 0-31 are used and
//     32-39 hold zeros;
//   - an unsigned 3-bit activation is applied as three bit planes, one VMM
//     each.
// One output pixel therefore takes 2 tiles x 3 planes = 6 VMMs; the tile
// takes 96. The macro re-programs the crossbar before every VMM (its state
// sequence is programming then one AI_RD clock), so every VMM is checked for
// the 80-clock programming phase, the single AI_RD clock and the result one
// clock later, and every one of its 40 output bits is checked against the
// sign of the exact integer partial sum computed here.
// The partial sums are then recombined as
//   y'(c) = sum over tiles, planes a and slices s of 2^(a+s) * (+1 | -1)
// (scale factors all 1, a zero sum read as -1) and compared with the exact
// convolution y(c); the correlation of y' with y over all 256 outputs must
// exceed 0.6, a loose bound showing that sign-only partial sums keep most
// of the layer's information on random data.
module tb_resnet20_tile_workload;
  import limo_pkg::*;
  localparam int NP = 5;
  localparam int CIN = 16, COUT = 16, K = 3, PATCH = 6, OUTW = PATCH - K + 1;
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

  // ---------------------------------------------------------- layer data
  int act [CIN][PATCH][PATCH];          // 0..7
  int wgt [COUT][CIN][K][K];            // -3..3
  int tw  [80][40];                     // ternary crossbar contents of the current tile

  always_comb begin
    prg_data = '0;
    for (int k = 0; k < 40; k++) begin
      prg_data[2*k]   = (tw[prg_row][k] == -1);
      prg_data[2*k+1] = (tw[prg_row][k] == 1);
    end
  end

  function automatic int tslice(int w, int s);
    int m;
    m = (w < 0) ? -w : w;
    return ((m >> s) & 1) * ((w < 0) ? -1 : 1);
  endfunction

  // Row r of tile t holds input channel 8t + r/9, tap r%9.
  task automatic load_tile(int t);
    for (int r = 0; r < 80; r++)
      for (int k = 0; k < 40; k++) begin
        tw[r][k] = 0;
        if (r < 72 && k < 2 * COUT)
          tw[r][k] = tslice(wgt[k / 2][8*t + r / 9][(r % 9) / K][(r % 9) % K], k % 2);
      end
  endtask

  int n_vmm = 0;

  task automatic vmm(input logic [79:0] x, output logic [39:0] y);
    @(negedge clk); start = 1; mode_ai = 1;
    @(negedge clk); start = 0; mode_ai = 0;
    vmm_in = x;
    repeat (80) @(negedge clk);
    check(state_o == ST_AI_RD, "AI_RD follows 80 programming clocks");
    @(negedge clk);
    check(vmm_valid && done, "result one clock after AI_RD");
    y = vmm_out;
    for (int k = 0; k < 40; k++) begin
      int s;
      s = 0;
      for (int r = 0; r < 80; r++) if (x[r]) s += tw[r][k];
      check(y[k] == (s > 0), $sformatf("vmm %0d bit %0d sum %0d got %0d", n_vmm, k, s, y[k]));
    end
    n_vmm++;
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real yq [OUTW][OUTW][COUT];
    int  ye [OUTW][OUTW][COUT];
    real sx, sy, sxx, syy, sxy, n, corr;
    for (int c = 0; c < CIN; c++) for (int i = 0; i < PATCH; i++) for (int j = 0; j < PATCH; j++)
      act[c][i][j] = $urandom_range(0, 7);
    for (int o = 0; o < COUT; o++) for (int c = 0; c < CIN; c++)
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++)
        wgt[o][c][i][j] = $urandom_range(0, 6) - 3;
    for (int i = 0; i < OUTW; i++) for (int j = 0; j < OUTW; j++) for (int o = 0; o < COUT; o++) begin
      yq[i][j][o] = 0.0;
      ye[i][j][o] = 0;
      for (int c = 0; c < CIN; c++) for (int di = 0; di < K; di++) for (int dj = 0; dj < K; dj++)
        ye[i][j][o] += wgt[o][c][di][dj] * act[c][i+di][j+dj];
    end
    repeat (3) @(negedge clk); rst_n = 1;

    for (int t = 0; t < 2; t++) begin
      load_tile(t);
      for (int i = 0; i < OUTW; i++) for (int j = 0; j < OUTW; j++)
        for (int a = 0; a < 3; a++) begin
          logic [79:0] x;
          logic [39:0] y;
          x = '0;
          for (int r = 0; r < 72; r++)
            x[r] = 1'((act[8*t + r / 9][i + (r % 9) / K][j + (r % 9) % K] >> a) & 1);
          vmm(x, y);
          for (int o = 0; o < COUT; o++)
            for (int s = 0; s < 2; s++)
              yq[i][j][o] += real'(1 << (a + s)) * (y[2*o + s] ? 1.0 : -1.0);
          for (int k = 2 * COUT; k < 40; k++) check(!y[k], "unused column pair reads 0");
        end
    end
    check(n_vmm == 2 * OUTW * OUTW * 3, "VMM count");

    sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0; n = 0;
    for (int i = 0; i < OUTW; i++) for (int j = 0; j < OUTW; j++) for (int o = 0; o < COUT; o++) begin
      sx += real'(ye[i][j][o]); sy += yq[i][j][o];
      sxx += real'(ye[i][j][o]) * real'(ye[i][j][o]); syy += yq[i][j][o] * yq[i][j][o];
      sxy += real'(ye[i][j][o]) * yq[i][j][o]; n += 1.0;
    end
    corr = (n * sxy - sx * sy) / $sqrt((n * sxx - sx * sx) * (n * syy - sy * sy));
    $display("resnet20 tile: %0d VMMs, correlation of 1-bit partial-sum output with exact convolution %f", n_vmm, corr);
    check(corr > 0.6, "sign-only partial sums track the exact convolution");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
