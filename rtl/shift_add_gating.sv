// shift_add_gating: shift-and-add re-routing of the sensed distance row and
// the local stochastic gating of the candidate cities.
//
// Shift and add: a weight row read from the crossbar arrives as W_BITS bit
// planes of N_CITY columns each, most significant plane first. City i's
// distance is d_i = {plane0[i], plane1[i], ..., plane(W_BITS-1)[i]}.
// This re-routing is wiring only: `dists` is a permutation of `sa_bits`
// and synthesizes to no cells.
//
// Local gate: each city has its own W_BITS-bit random word r_i. City i passes
// the gate when r_i > d_i, i.e. with probability (2^W_BITS-1-d_i)/2^W_BITS,
// which realises the linear rule P_i = 1 - d_i/d_max: near cities are kept
// more often. When the global gate bit g_bit is 0 the local gates are
// bypassed and selection is purely greedy.
//
// Gating: the surviving set is the candidate mask (unvisited cities) AND the
// local gates. If g_bit is 1 but no candidate survives, the full candidate
// mask is used instead (greedy fallback) and `fallback` is raised.
//
// The bit-plane layout, the 4-bit words and the AND with the candidate mask
// follow the paper. The comparison direction r_i > d_i follows the paper's
// gating figure and its linear rule; the paper's text writes s_i = [r_i < d_i]
// instead. The fallback is this design's choice. Purely combinational.
module shift_add_gating #(
  parameter int unsigned N_CITY = limo_pkg::N_CITY,
  parameter int unsigned W_BITS = limo_pkg::W_BITS
) (
  input  logic [N_CITY*W_BITS-1:0]             sa_bits,
  input  logic [N_CITY-1:0][W_BITS-1:0]        r_local,
  input  logic                                 g_bit,
  input  logic [N_CITY-1:0]                    cand,
  output logic [N_CITY-1:0][W_BITS-1:0]        dists,
  output logic [N_CITY-1:0]                    gate,
  output logic [N_CITY-1:0]                    survive,
  output logic                                 fallback
);

  always_comb begin
    for (int i = 0; i < N_CITY; i++) begin
      for (int b = 0; b < W_BITS; b++) begin
        dists[i][W_BITS-1-b] = sa_bits[b*N_CITY + i];
      end
      gate[i] = (r_local[i] > dists[i]);
    end
  end

  logic [N_CITY-1:0] gated;

  assign gated    = cand & gate;
  assign fallback = g_bit && (gated == '0) && (cand != '0);
  assign survive  = (!g_bit || fallback) ? cand : gated;

endmodule
