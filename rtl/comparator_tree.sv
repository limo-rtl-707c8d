// comparator_tree: selects the surviving candidate with the smallest
// distance.
//
// A binary tree of log2(N) levels of two-input comparators. Each node passes
// on the valid input with the smaller value; between two valid inputs of
// equal value the lower-numbered city wins, and a node with no valid input
// is invalid. The root gives the winning city index, its distance, and
// `valid` (0 when no candidate survived). Purely combinational; N must be a
// power of two. The paper names the block and its function; the tie rule is
// this design's choice.
module comparator_tree #(
  parameter int unsigned N = limo_pkg::N_CITY,
  parameter int unsigned W = limo_pkg::W_BITS
) (
  input  logic [N-1:0][W-1:0]   dists,
  input  logic [N-1:0]          valid_in,
  output logic [$clog2(N)-1:0]  win_idx,
  output logic [W-1:0]          win_dist,
  output logic                  valid
);

  localparam int unsigned L = $clog2(N);

  typedef struct packed {
    logic         v;
    logic [W-1:0] d;
    logic [L-1:0] idx;
  } node_t;

  // Level 0 holds the leaves; level l holds N >> l nodes.
  node_t lvl [L+1][N];

  always_comb begin
    for (int l = 0; l <= L; l++)
      for (int n = 0; n < N; n++)
        lvl[l][n] = '0;
    for (int n = 0; n < N; n++) begin
      lvl[0][n].v   = valid_in[n];
      lvl[0][n].d   = dists[n];
      lvl[0][n].idx = L'(n);
    end
    for (int l = 1; l <= L; l++) begin
      for (int n = 0; n < (N >> l); n++) begin
        node_t a, b;
        a = lvl[l-1][2*n];
        b = lvl[l-1][2*n+1];
        if (a.v && (!b.v || a.d <= b.d)) lvl[l][n] = a;
        else                             lvl[l][n] = b;
      end
    end
  end

  assign win_idx  = lvl[L][0].idx;
  assign win_dist = lvl[L][0].d;
  assign valid    = lvl[L][0].v;

endmodule
