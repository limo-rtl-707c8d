// limo_controller: the FSM control block of the LIMO macro.
//
// States and their lengths in clocks (paper's state table):
//   IDLE (waits for start) -> PRG_ROW (80: one crossbar row per clock)
//   -> AI_RD (1, one VMM) -> IDLE                         in VMM mode
//   -> GEN (1) -> [LEN (6)] -> SS_RD (2) -> W_RD (1) -> STO_SOLN (2) -> ...
//      ... -> LAST_CITY (1) -> GEN | SS_RD | IDLE         in annealing mode
// Annealing runs three nested loops: pass, tour position (index 2..index_max)
// and problem (0..N_PROB-1). GEN, once per pass, samples the global gate
// (g_bit) and lowers the reference word; if g_bit is 1, LEN generates fresh
// local random words before the first problem of every tour position (its
// last two clocks overlap the following SS_RD). Per problem and position,
// SS_RD reads the spin row of the previous position to learn the previous
// city, W_RD reads that city's distance row, and STO_SOLN writes the winner
// of the comparator tree into the spin row of the current position, clears
// it from the problem's candidate mask, adds its distance to the problem's
// running sum, then reads the chosen city's row (second clock) and records
// the city in the scratch SRAM. At the last position every problem passes
// through LAST_CITY, which adds the closing edge (back to the start city,
// or to the fixed exit city in open mode), compares the tour length with
// the best so far, toggles the problem's parity bit when it is shorter,
// and resets the running sum and candidate mask. Annealing ends after
// pass_count passes (0: no limit) or when the reference word is exhausted.
// Only the first problem_count problems (1..N_PROB; 0 or more than N_PROB
// means all) are annealed, as in the paper's PASS/INDEX/PROBLEM loop.
//
// Tour positions are numbered from 1; position k is spin row k-1 of the
// problem. City numbers are 0..index_count-1. The start city is read from
// spin row 0 while programming, and in open mode the exit city from spin row
// index_count-1. The configuration inputs are sampled at `start`.
//
// Follows the paper: states, durations, transitions, loop order, candidate
// masking, running sum, best-sum/parity update and the open/closed modes.
// This design's choices: the once-per-pass global bit follows the state
// table (the paper's algorithm draws it at every position), the closing
// edge is sensed in the second STO_SOLN clock of the last position, a tour
// replaces the best only when strictly shorter, the meaning of a zero
// pass or problem count, and reading the exit city from the spin rows.
// rst_n is the asynchronous reset and also disables the assertions at the
// end of the file; lint reports that mixed use, which is intended.
module limo_controller
#(
  parameter int unsigned N_PROB = limo_pkg::N_PROB,
  parameter int unsigned N_CITY = limo_pkg::N_CITY,
  parameter int unsigned W_BITS = limo_pkg::W_BITS,
  parameter int unsigned SUM_W  = limo_pkg::SUM_W,
  localparam int unsigned ROWS  = N_PROB * N_CITY,
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned PW    = $clog2(N_PROB),
  localparam int unsigned CW    = $clog2(N_CITY),
  localparam int unsigned IW    = $clog2(N_CITY + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration, sampled at start
  input  logic                        start,
  input  logic                        mode_ai,
  input  logic                        open_loop,
  input  logic [IW-1:0]               index_count,
  input  logic [15:0]                 pass_count,
  input  logic [PW:0]                 problem_count,
  // programming data (spin columns of the row being written)
  input  logic [N_CITY-1:0]           prg_spin,
  // from the sense amplifiers / shift-and-add
  input  logic [N_CITY-1:0]           sa_spin,
  input  logic [N_CITY-1:0][W_BITS-1:0] dists,
  // from the comparator tree
  input  logic [CW-1:0]               win_idx,
  input  logic [W_BITS-1:0]           win_dist,
  input  logic                        win_valid,
  // from the annealing schedule
  input  logic                        g_bit_now,
  input  logic                        g_bit,
  input  logic                        exhausted,
  // state and crossbar addressing
  output limo_pkg::state_t            state,
  output logic                        sub,
  output logic [RW-1:0]               prg_row,
  output logic [RW-1:0]               ss_row,
  output logic [RW-1:0]               w_row,
  output logic [RW-1:0]               sto_row,
  output logic [N_CITY-1:0]           sto_spin,
  output logic [RW-1:0]               chk_row,
  // schedule and TRNG control
  output logic                        sched_init,
  output logic                        gen,
  output logic                        l_en,
  // candidate mask of the problem being processed
  output logic [N_CITY-1:0]           cand,
  // scratch SRAM write port
  output logic                        sc_we,
  output logic [PW-1:0]               sc_prob,
  output logic                        sc_par,
  output logic [CW-1:0]               sc_row,
  output logic [N_CITY-1:0]           sc_data,
  // status
  output logic                        busy,
  output logic                        done,
  output logic                        vmm_valid,
  output logic                        best_upd,
  output logic [PW-1:0]               prob,
  output logic [IW-1:0]               idx,
  output logic [15:0]                 passes,
  output logic [SUM_W-1:0]            best_sum [N_PROB],
  output logic [N_PROB-1:0]           parity
);

  import limo_pkg::*;

  // ---------------------------------------------------------------- config
  logic            mode_ai_r, open_r;
  logic [IW-1:0]   ncity_r;
  logic [15:0]     npass_r;
  logic [PW:0]     nprob_r;
  logic [IW-1:0]   idx_max;

  assign idx_max = open_r ? ncity_r - IW'(1) : ncity_r;

  // ------------------------------------------------------------- registers
  logic [6:0]              cnt;
  logic                    len_tail;
  logic [CW-1:0]           prev_city, chosen;
  logic [N_CITY-1:0]       cand_r    [N_PROB];
  logic [SUM_W-1:0]        sum_r     [N_PROB];
  logic [CW-1:0]           start_c   [N_PROB];
  logic [CW-1:0]           exit_c    [N_PROB];

  assign sub = cnt[0];

  function automatic logic [CW-1:0] enc(logic [N_CITY-1:0] oh);
    logic [CW-1:0] r;
    r = '0;
    for (int i = 0; i < N_CITY; i++) if (oh[i]) r = CW'(i);
    return r;
  endfunction

  function automatic logic [RW-1:0] row_of(logic [PW-1:0] p, logic [CW-1:0] r);
    return RW'(32'(p) * N_CITY + 32'(r));
  endfunction

  function automatic logic [N_CITY-1:0] init_mask(logic [CW-1:0] s, logic [CW-1:0] e);
    logic [N_CITY-1:0] m;
    for (int i = 0; i < N_CITY; i++) m[i] = (i < int'(ncity_r));
    m[s] = 1'b0;
    if (open_r) m[e] = 1'b0;
    return m;
  endfunction

  // --------------------------------------------------------- datapath taps
  logic [PW-1:0]      prg_p;
  logic [CW-1:0]      prg_r;
  logic [CW-1:0]      close_c;
  logic [SUM_W-1:0]   tour_len;
  logic               last_prob, last_idx, last_pass;

  assign prg_p     = PW'(32'(cnt) / N_CITY);
  assign prg_r     = CW'(32'(cnt) % N_CITY);
  assign prg_row   = RW'(cnt);
  assign ss_row    = row_of(prob, CW'(idx - IW'(2)));
  assign w_row     = row_of(prob, prev_city);
  assign sto_row   = row_of(prob, CW'(idx - IW'(1)));
  assign sto_spin  = win_valid ? (N_CITY'(1) << win_idx) : '0;
  assign chk_row   = row_of(prob, chosen);
  assign cand      = cand_r[prob];
  assign close_c   = open_r ? exit_c[prob] : start_c[prob];
  assign tour_len  = sum_r[prob] + SUM_W'(dists[close_c]);
  assign last_prob = ({1'b0, prob} == nprob_r - (PW+1)'(1));
  assign last_idx  = (idx == idx_max);
  assign last_pass = ((npass_r != 16'd0) && (passes + 16'd1 >= npass_r)) || exhausted;

  assign sched_init = (state == ST_PRG_ROW) && (cnt == 7'(DUR_PRG_ROW - 1)) && !mode_ai_r;
  assign gen        = (state == ST_GEN);
  assign l_en       = (state == ST_LEN) || ((state == ST_SS_RD) && len_tail);
  assign busy       = (state != ST_IDLE);

  assign sc_we   = (state == ST_STO_SOLN) && sub;
  assign sc_prob = prob;
  assign sc_par  = parity[prob];
  assign sc_row  = CW'(idx - IW'(1));
  assign sc_data = N_CITY'(1) << chosen;

  // ------------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      cnt       <= '0;
      mode_ai_r <= 1'b0;
      open_r    <= 1'b0;
      ncity_r   <= IW'(N_CITY);
      npass_r   <= '0;
      nprob_r   <= (PW+1)'(N_PROB);
      len_tail  <= 1'b0;
      prev_city <= '0;
      chosen    <= '0;
      prob      <= '0;
      idx       <= IW'(2);
      passes    <= '0;
      parity    <= '0;
      done      <= 1'b0;
      vmm_valid <= 1'b0;
      best_upd  <= 1'b0;
      for (int p = 0; p < N_PROB; p++) begin
        cand_r[p]   <= '0;
        sum_r[p]    <= '0;
        best_sum[p] <= '1;
        start_c[p]  <= '0;
        exit_c[p]   <= '0;
      end
    end else begin
      done      <= 1'b0;
      vmm_valid <= 1'b0;
      best_upd  <= 1'b0;
      cnt       <= cnt + 7'd1;
      unique case (state)
        ST_IDLE: begin
          cnt <= '0;
          if (start) begin
            state     <= ST_PRG_ROW;
            mode_ai_r <= mode_ai;
            open_r    <= open_loop;
            ncity_r   <= index_count;
            npass_r   <= pass_count;
            nprob_r   <= (problem_count == '0 || problem_count > (PW+1)'(N_PROB))
                         ? (PW+1)'(N_PROB) : problem_count;
          end
        end

        ST_PRG_ROW: begin
          if (prg_r == '0)                   start_c[prg_p] <= enc(prg_spin);
          if (prg_r == CW'(ncity_r - IW'(1))) exit_c[prg_p] <= enc(prg_spin);
          if (cnt == 7'(DUR_PRG_ROW - 1)) begin
            cnt <= '0;
            if (mode_ai_r) begin
              state <= ST_AI_RD;
            end else begin
              state  <= ST_GEN;
              prob   <= '0;
              idx    <= IW'(2);
              passes <= '0;
              parity <= '0;
              for (int p = 0; p < N_PROB; p++) begin
                sum_r[p]    <= '0;
                best_sum[p] <= '1;
              end
            end
          end
        end

        ST_GEN: begin
          cnt      <= '0;
          len_tail <= g_bit_now;
          state    <= g_bit_now ? ST_LEN : ST_SS_RD;
          for (int p = 0; p < N_PROB; p++) cand_r[p] <= init_mask(start_c[p], exit_c[p]);
        end

        ST_LEN: begin
          if (cnt == 7'(DUR_LEN - 1)) begin
            cnt   <= '0;
            state <= ST_SS_RD;
          end
        end

        ST_SS_RD: begin
          if (cnt == 7'(DUR_SS_RD - 1)) begin
            cnt       <= '0;
            prev_city <= enc(sa_spin);
            len_tail  <= 1'b0;
            state     <= ST_W_RD;
          end
        end

        ST_W_RD: begin
          cnt   <= '0;
          state <= ST_STO_SOLN;
        end

        ST_STO_SOLN: begin
          if (!sub) begin
            chosen <= win_idx;
            if (win_valid) begin
              cand_r[prob][win_idx] <= 1'b0;
              sum_r[prob]           <= sum_r[prob] + SUM_W'(win_dist);
            end
          end else begin
            cnt <= '0;
            if (last_idx) begin
              state <= ST_LAST_CITY;
            end else if (last_prob) begin
              prob     <= '0;
              idx      <= idx + IW'(1);
              len_tail <= g_bit;
              state    <= g_bit ? ST_LEN : ST_SS_RD;
            end else begin
              prob  <= prob + PW'(1);
              state <= ST_SS_RD;
            end
          end
        end

        ST_LAST_CITY: begin
          cnt <= '0;
          if (tour_len < best_sum[prob]) begin
            best_sum[prob] <= tour_len;
            parity[prob]   <= ~parity[prob];
            best_upd       <= 1'b1;
          end
          sum_r[prob]  <= '0;
          cand_r[prob] <= init_mask(start_c[prob], exit_c[prob]);
          if (last_prob) begin
            prob   <= '0;
            idx    <= IW'(2);
            passes <= passes + 16'd1;
            if (last_pass) begin
              state <= ST_IDLE;
              done  <= 1'b1;
            end else begin
              state <= ST_GEN;
            end
          end else begin
            prob  <= prob + PW'(1);
            state <= ST_SS_RD;
          end
        end

        ST_AI_RD: begin
          cnt       <= '0;
          state     <= ST_IDLE;
          vmm_valid <= 1'b1;
          done      <= 1'b1;
        end

        default: begin
          state <= ST_IDLE;
          cnt   <= '0;
        end
      endcase
    end
  end

  // A position being filled always has at least one candidate left.
  a_winner: assert property (@(posedge clk) disable iff (!rst_n)
    (state == ST_STO_SOLN && !sub) |-> win_valid);

  // A state never outlasts its tabled duration.
  a_dur: assert property (@(posedge clk) disable iff (!rst_n)
    ((state == ST_GEN)       -> (cnt < 7'(DUR_GEN)))      &&
    ((state == ST_W_RD)      -> (cnt < 7'(DUR_W_RD)))     &&
    ((state == ST_LAST_CITY) -> (cnt < 7'(DUR_LAST)))     &&
    ((state == ST_AI_RD)     -> (cnt < 7'(DUR_AI_RD)))    &&
    ((state == ST_SS_RD)     -> (cnt < 7'(DUR_SS_RD)))    &&
    ((state == ST_STO_SOLN)  -> (cnt < 7'(DUR_STO_SOLN))) &&
    ((state == ST_LEN)       -> (cnt < 7'(DUR_LEN))));

endmodule
