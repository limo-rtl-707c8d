// limo_macro: top level of the LIMO macro, an 8T-SRAM compute-in-memory
// array that either anneals five 16-city TSPs in place or computes 1-bit
// quantised ternary vector-matrix products.
//
// Blocks: cim_array (80x80 crossbar), stage_drivers (per-state decoders and
// bit-line drivers), sense_amp_array (one sense amplifier per column),
// two trng_bank stochastic modules (16 units in parallel for the global
// word r_g, 16 units x 4 serial bits for the local words r_i),
// anneal_schedule (reference word and global gate), shift_add_gating,
// comparator_tree, scratch_sram (best tours) and limo_controller (FSM).
//
// Operation. Pulse `start` with the configuration applied. The macro first
// programs all 80 rows, one per clock: it presents the row number on
// prg_row and writes prg_data into that row in the same clock. Row
// 16*p + k belongs to problem p; its columns 16*b + j (b = 0..3) hold bit
// 3-b of the distance from city k to city j (MSB plane first) and columns
// 64 + j hold the one-hot spin of tour position k+1 (only position 1, the
// start city, and in open mode position index_count, the exit city, matter).
//   mode_ai = 1: the vector vmm_in is applied to the read word-lines for one
//   clock; vmm_out (one bit per ternary weight, column pair (2k, 2k+1) with
//   weight +1 = (0,1), -1 = (1,0), 0 = (0,0)) and vmm_valid follow a clock
//   later. vmm_out[k] = 1 when sum_r vmm_in[r] * w[r][k] > 0.
//   mode_ai = 0: the macro anneals problems 0..problem_count-1 (0: all five)
//   with annealed greedy insertion until pass_count passes (0: no limit) have run or the reference
//   word, loaded with r_ref_init and lowered per pass by the table chosen
//   with sched_sel (0: 0.9995, 1: 0.995), is exhausted. best_sum[p] is the
//   shortest tour length found for problem p; its tour is read from the
//   scratch SRAM with sc_re/sc_rprob/sc_rrow (one clock latency), row k-1
//   holding the one-hot city of position k for k = 2..index_max.
// `done` pulses when either operation ends; `busy` is high meanwhile.
// Clock 100 MHz in the paper; everything is synchronous to `clk` except the
// behavioural TRNG cells, which are clocked by their RD/WRITE phases.
// Lint notes: several internal taps (gate, fallback, best_upd, cur_prob,
// cur_idx, passes, r_ref, the schedule's pass counter, the banks' unused
// word or bit outputs) are wired but have no load in the macro; they are
// kept as named observation points for simulation. rst_n is both the
// asynchronous reset of the registers and the disable condition of the
// controller's assertions, which lint reports as mixed use; that is intended.
module limo_macro
#(
  parameter int unsigned N_PROB = limo_pkg::N_PROB,
  parameter int unsigned N_CITY = limo_pkg::N_CITY,
  parameter int unsigned W_BITS = limo_pkg::W_BITS,
  localparam int unsigned ROWS  = N_PROB * N_CITY,
  localparam int unsigned COLS  = N_CITY * W_BITS + N_CITY,
  localparam int unsigned SPIN0 = N_CITY * W_BITS,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned PW    = $clog2(N_PROB),
  localparam int unsigned CW    = $clog2(N_CITY),
  localparam int unsigned IW    = $clog2(N_CITY + 1),
  localparam int unsigned SUM_W = limo_pkg::SUM_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  mode_ai,
  input  logic                  open_loop,
  input  logic [IW-1:0]         index_count,
  input  logic [15:0]           pass_count,
  input  logic [PW:0]           problem_count,
  input  logic                  sched_sel,
  input  logic [limo_pkg::RG_BITS-1:0] r_ref_init,
  output logic [RW-1:0]         prg_row,
  input  logic [COLS-1:0]       prg_data,
  input  logic [ROWS-1:0]       vmm_in,
  output logic [COLS/2-1:0]     vmm_out,
  output logic                  vmm_valid,
  output logic                  busy,
  output logic                  done,
  output logic [3:0]            state_o,
  output logic [SUM_W-1:0]      best_sum [N_PROB],
  output logic [N_PROB-1:0]     parity,
  input  logic                  sc_re,
  input  logic [PW-1:0]         sc_rprob,
  input  logic [CW-1:0]         sc_rrow,
  output logic [N_CITY-1:0]     sc_rdata
);

  import limo_pkg::*;

  state_t state;
  logic   sub;

  // crossbar interface
  logic [ROWS-1:0]               wwl, rwl;
  logic [COLS-1:0]               wbl, wbl_en;
  logic                          sl_connect, sa_en;
  logic signed [CUR_W-1:0]       col_cur [COLS];
  logic [COLS-1:0]               sa_out;

  // controller addressing
  logic [RW-1:0]                 ss_row, w_row, sto_row, chk_row;
  logic [N_CITY-1:0]             sto_spin;

  // stochastic path
  logic                          sched_init, gen, l_en;
  logic [RG_BITS-1:0]            r_g;
  logic [RG_BITS-1:0][0:0]       r_g_word;
  logic [N_CITY-1:0][W_BITS-1:0] r_loc;
  logic [N_CITY-1:0]             r_loc_now;
  logic                          g_bit_now, g_bit, exhausted;
  logic [RG_BITS-1:0]            r_ref;
  logic [15:0]                   sched_pass;

  // selection path
  logic [N_CITY-1:0][W_BITS-1:0] dists;
  logic [N_CITY-1:0]             gate, survive, cand;
  logic                          fallback;
  logic [CW-1:0]                 win_idx;
  logic [W_BITS-1:0]             win_dist;
  logic                          win_valid;

  // scratch write port and status
  logic                          sc_we, sc_par;
  logic [PW-1:0]                 sc_prob, cur_prob;
  logic [CW-1:0]                 sc_row;
  logic [N_CITY-1:0]             sc_data;
  logic                          best_upd;
  logic [IW-1:0]                 cur_idx;
  logic [15:0]                   passes;

  assign state_o = state;

  stage_drivers #(.ROWS(ROWS), .COLS(COLS), .N_CITY(N_CITY), .SPIN_COL(SPIN0)) u_drv (
    .state, .sub, .prg_row, .prg_data, .ss_row, .w_row, .sto_row, .sto_spin, .chk_row,
    .vmm_in, .wwl, .wbl, .wbl_en, .rwl, .sl_connect, .sa_en
  );

  cim_array #(.ROWS(ROWS), .COLS(COLS), .CUR_W(CUR_W)) u_xbar (
    .clk, .wwl, .wbl, .wbl_en, .rwl, .sl_connect, .col_cur
  );

  sense_amp_array #(.COLS(COLS), .CUR_W(CUR_W)) u_sa (
    .clk, .rst_n, .sa_en, .col_cur, .sa_out
  );

  for (genvar k = 0; k < COLS / 2; k++) begin : g_vmm
    assign vmm_out[k] = sa_out[2*k+1];
  end

  trng_bank #(.UNITS(RG_BITS), .BITS(1), .SEED(1)) u_gtrng (
    .clk, .rst_n, .en(gen), .bits_now(r_g), .word(r_g_word)
  );

  trng_bank #(.UNITS(N_CITY), .BITS(W_BITS), .SEED(2)) u_ltrng (
    .clk, .rst_n, .en(l_en), .bits_now(r_loc_now), .word(r_loc)
  );

  anneal_schedule #(.RG_BITS(RG_BITS)) u_sched (
    .clk, .rst_n, .init(sched_init), .r_ref_init, .sched(sched_t'(sched_sel)), .gen,
    .r_g, .g_bit_now, .g_bit, .r_ref, .pass_cnt(sched_pass), .exhausted
  );

  shift_add_gating #(.N_CITY(N_CITY), .W_BITS(W_BITS)) u_gate (
    .sa_bits(sa_out[SPIN0-1:0]), .r_local(r_loc), .g_bit, .cand,
    .dists, .gate, .survive, .fallback
  );

  comparator_tree #(.N(N_CITY), .W(W_BITS)) u_tree (
    .dists, .valid_in(survive), .win_idx, .win_dist, .valid(win_valid)
  );

  limo_controller #(.N_PROB(N_PROB), .N_CITY(N_CITY), .W_BITS(W_BITS), .SUM_W(SUM_W)) u_ctrl (
    .clk, .rst_n, .start, .mode_ai, .open_loop, .index_count, .pass_count, .problem_count,
    .prg_spin(prg_data[SPIN0 +: N_CITY]), .sa_spin(sa_out[SPIN0 +: N_CITY]), .dists,
    .win_idx, .win_dist, .win_valid, .g_bit_now, .g_bit, .exhausted,
    .state, .sub, .prg_row, .ss_row, .w_row, .sto_row, .sto_spin, .chk_row,
    .sched_init, .gen, .l_en, .cand,
    .sc_we, .sc_prob, .sc_par, .sc_row, .sc_data,
    .busy, .done, .vmm_valid, .best_upd, .prob(cur_prob), .idx(cur_idx), .passes,
    .best_sum, .parity
  );

  // The best tour of a problem lives in the sub-array opposite its parity.
  scratch_sram #(.N_PROB(N_PROB), .N_CITY(N_CITY)) u_scratch (
    .clk, .we(sc_we), .wprob(sc_prob), .wpar(sc_par), .wrow(sc_row), .wdata(sc_data),
    .re(sc_re), .rprob(sc_rprob), .rpar(~parity[sc_rprob]), .rrow(sc_rrow), .rdata(sc_rdata)
  );

endmodule
