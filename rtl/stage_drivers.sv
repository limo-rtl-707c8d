// stage_drivers: state-specific word-line decoders and bit-line drivers of
// the crossbar.
//
// Instead of one general row/column decoder, every FSM state that touches
// the crossbar has its own small decoder, enabled only in that state; their
// outputs are OR-merged into the word-line and bit-line drives:
//   PRG_ROW  : write word-line of row prg_row, all bit-lines driven with
//              prg_data (weights and spins of that row).
//   SS_RD    : read word-line of the spin row ss_row (previous position).
//   W_RD     : read word-line of the weight row w_row (previous city).
//   STO_SOLN : first clock writes the one-hot sto_spin into the spin columns
//              of row sto_row; second clock reads row chk_row (the city just
//              chosen) so the closing edge can be sensed.
//   AI_RD    : the input vector drives the read word-lines and the source
//              lines of each column pair are joined (ternary VMM).
// sa_en (the sense amplifiers' RD) is raised in every reading clock.
// `sub` is the clock number within the current state (0 or 1).
// The per-state decoder structure follows the paper; which clock of a
// two-clock state does what is this design's choice. Combinational.
module stage_drivers
#(
  parameter int unsigned ROWS     = limo_pkg::ROWS,
  parameter int unsigned COLS     = limo_pkg::COLS,
  parameter int unsigned N_CITY   = limo_pkg::N_CITY,
  parameter int unsigned SPIN_COL = limo_pkg::SPIN_COL
) (
  input  limo_pkg::state_t          state,
  input  logic                      sub,
  input  logic [$clog2(ROWS)-1:0]   prg_row,
  input  logic [COLS-1:0]           prg_data,
  input  logic [$clog2(ROWS)-1:0]   ss_row,
  input  logic [$clog2(ROWS)-1:0]   w_row,
  input  logic [$clog2(ROWS)-1:0]   sto_row,
  input  logic [N_CITY-1:0]         sto_spin,
  input  logic [$clog2(ROWS)-1:0]   chk_row,
  input  logic [ROWS-1:0]           vmm_in,
  output logic [ROWS-1:0]           wwl,
  output logic [COLS-1:0]           wbl,
  output logic [COLS-1:0]           wbl_en,
  output logic [ROWS-1:0]           rwl,
  output logic                      sl_connect,
  output logic                      sa_en
);

  import limo_pkg::*;

  function automatic logic [ROWS-1:0] dec(logic [$clog2(ROWS)-1:0] a, logic en);
    logic [ROWS-1:0] o;
    o = '0;
    if (en) o[a] = 1'b1;
    return o;
  endfunction

  logic en_prg, en_ss, en_w, en_sto_wr, en_sto_rd, en_ai;
  logic [COLS-1:0] spin_cols;

  assign en_prg    = (state == ST_PRG_ROW);
  assign en_ss     = (state == ST_SS_RD);
  assign en_w      = (state == ST_W_RD);
  assign en_sto_wr = (state == ST_STO_SOLN) && !sub;
  assign en_sto_rd = (state == ST_STO_SOLN) &&  sub;
  assign en_ai     = (state == ST_AI_RD);

  assign spin_cols = COLS'({N_CITY{1'b1}}) << SPIN_COL;

  // Write word-lines: programming decoder | solution-store decoder.
  assign wwl = dec(prg_row, en_prg) | dec(sto_row, en_sto_wr);

  // Bit-line drivers (operand-isolated by the state enables).
  assign wbl    = ({COLS{en_prg}} & prg_data)
                | ({COLS{en_sto_wr}} & (COLS'(sto_spin) << SPIN_COL));
  assign wbl_en = ({COLS{en_prg}}) | ({COLS{en_sto_wr}} & spin_cols);

  // Read word-lines: one decoder per reading state, plus the VMM input.
  assign rwl = dec(ss_row, en_ss) | dec(w_row, en_w) | dec(chk_row, en_sto_rd)
             | ({ROWS{en_ai}} & vmm_in);

  assign sl_connect = en_ai;
  assign sa_en      = en_ss | en_w | en_sto_rd | en_ai;

endmodule
