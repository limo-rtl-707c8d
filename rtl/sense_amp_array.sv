// sense_amp_array: one latch-type sense amplifier per crossbar column.
//
// The paper's sense amplifier is a cross-coupled latch with an input pair
// (I+, I-) and a tail switch driven by RD; it resolves which input carries
// more current. Here each column's current arrives as a signed integer (see
// cim_array) and is compared against a reference of half a cell current:
// the output is 1 when the current is positive. For a single-row read this
// recovers the stored bit; for a VMM with joined source lines it is the sign
// function that quantises each partial sum to one bit (a zero sum reads as
// 0, a choice of this design). The decision is taken at the clock edge that
// ends a cycle with sa_en (the RD phase) high and is held until the next
// one. Outputs reset to 0.
module sense_amp_array #(
  parameter int unsigned COLS  = limo_pkg::COLS,
  parameter int unsigned CUR_W = limo_pkg::CUR_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sa_en,
  input  logic signed [CUR_W-1:0] col_cur [COLS],
  output logic [COLS-1:0]         sa_out
);

  logic [COLS-1:0] decide;

  always_comb begin
    for (int c = 0; c < COLS; c++) decide[c] = (col_cur[c] > 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sa_out <= '0;
    else if (sa_en) sa_out <= decide;
  end

endmodule
