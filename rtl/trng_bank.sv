// trng_bank: a stochastic module made of UNITS true-random-bit units.
//
// Each unit is the XOR of two identical STT-MTJ cells (stt_trng_cell), which
// cancels the residual bias of either device. The bank sequences the cells'
// RD and WRITE phases at two clocks per bit (the 20 ns cell cycle at
// 100 MHz): while `en` is high the bank alternates a read clock (RD high,
// the unit outputs are valid on `bits_now` during it) and a write clock
// (WRITE high, the MTJs are stochastically switched for the next bit).
// A write clock always follows a read clock, even if `en` has dropped.
// At the end of every read clock each unit shifts its bit into its own
// BITS-wide shift register, `word`, MSB first.
//
// In the macro one bank with BITS=1 produces the 16-bit global word r_g
// (read in parallel, one clock, from `bits_now`), and one with BITS=4
// produces the sixteen 4-bit local words r_i serially over 8 clocks. Unit
// counts follow the paper; the XOR pairing per unit, the two-clock phase
// split and the shift order are this design's reading of it. SEED only
// gives every behavioural cell its own random stream in simulation.
// The cells' complementary OUTB outputs are left unconnected (unused).
module trng_bank #(
  parameter int unsigned UNITS = 16,
  parameter int unsigned BITS  = 1,
  parameter int unsigned SEED  = 1    // distinguishes the cells of different banks
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        en,
  output logic [UNITS-1:0]            bits_now,
  output logic [UNITS-1:0][BITS-1:0]  word
);

  logic phase;          // 0: read clock, 1: write clock
  logic rd, wr;

  assign rd = en & ~phase;
  assign wr = phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= 1'b0;
    else        phase <= rd;
  end

  for (genvar u = 0; u < UNITS; u++) begin : g_unit
    logic a_out, a_out_b, b_out, b_out_b;
    stt_trng_cell #(.SEED(SEED * 1024 + 2 * u))     u_a (.rd(rd), .write(wr), .out(a_out), .out_b(a_out_b));
    stt_trng_cell #(.SEED(SEED * 1024 + 2 * u + 1)) u_b (.rd(rd), .write(wr), .out(b_out), .out_b(b_out_b));
    assign bits_now[u] = a_out ^ b_out;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)  word[u] <= '0;
      else if (rd) word[u] <= BITS'({word[u], bits_now[u]});
    end
  end

endmodule
