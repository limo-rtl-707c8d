// cim_array: the 80x80 8T-SRAM compute-in-memory crossbar of the LIMO macro.
//
// Each cell stores one bit. Writes go through the decoupled write port: every
// row whose write word-line (wwl) is high takes the bit-line data (wbl) in the
// columns whose bit-line driver is enabled (wbl_en), at the clock edge.
// Reads go through the read port and are combinational: a column's read
// current is the number of cells in it that are both stored 1 and on a row
// whose read word-line (rwl) is high. With one row selected this is a normal
// row read (current 0 or 1); with many rows selected it is an in-memory
// accumulation.
//
// Ternary weights (VMM mode): two neighbouring columns form one weight. In
// the paper's bit-cell the first column of a pair (6T_A, NMOS read path)
// pulls current and the second (6T_B, PMOS read path) pushes it; with the
// pair's source lines joined (sl_connect) the net current is
// sum(rwl & B) - sum(rwl & A), so (A,B) = (0,1) is +1, (1,0) is -1 and
// (0,0) is 0, as in the truth table printed in the paper's bit-cell figure.
// The net current is delivered on the second column of the pair; the first
// column then carries no current.
//
// Analog currents are represented as exact signed integers in units of one
// cell's on-current; device mismatch and bit-line saturation are not
// modelled. The storage has no reset, like the SRAM it stands for: it must be
// programmed before it is read.
module cim_array #(
  parameter int unsigned ROWS  = limo_pkg::ROWS,
  parameter int unsigned COLS  = limo_pkg::COLS,
  parameter int unsigned CUR_W = limo_pkg::CUR_W
) (
  input  logic                          clk,
  input  logic [ROWS-1:0]               wwl,
  input  logic [COLS-1:0]               wbl,
  input  logic [COLS-1:0]               wbl_en,
  input  logic [ROWS-1:0]               rwl,
  input  logic                          sl_connect,
  output logic signed [CUR_W-1:0]       col_cur [COLS]
);

  logic [COLS-1:0] mem [ROWS];

  // Write port: one row per generate instance; enabled columns take wbl.
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    always_ff @(posedge clk) begin
      if (wwl[r]) mem[r] <= (mem[r] & ~wbl_en) | (wbl & wbl_en);
    end
  end

  // Per-column read current of the selected rows.
  logic [CUR_W-1:0] pop [COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [ROWS-1:0] hit;
    for (genvar r = 0; r < ROWS; r++) begin : g_hit
      assign hit[r] = rwl[r] & mem[r][c];
    end
    assign pop[c] = CUR_W'($countones(hit));
    if (c % 2 == 1) begin : g_odd
      assign col_cur[c] = sl_connect ? $signed(pop[c]) - $signed(pop[c-1]) : $signed(pop[c]);
    end else begin : g_even
      assign col_cur[c] = sl_connect ? '0 : $signed(pop[c]);
    end
  end

endmodule
