// scratch_sram: the 6T-SRAM scratch array that keeps the best tour of each
// problem.
//
// Every problem owns two sub-arrays of N_CITY rows, one per value of its
// parity bit; a row holds the one-hot city chosen for that tour position.
// During annealing the tour under construction is written into the
// sub-array selected by the problem's current parity. When the finished
// tour is better than the best so far, the controller toggles the parity,
// so the sub-array just written becomes the preserved best tour and the
// next pass overwrites the other one. The best tour of problem p is thus in
// sub-array ~parity[p].
//
// One write port (applied at the clock edge) and one read port with a
// registered output (data one clock after `re`). No reset: like the SRAM it
// models, the contents are undefined until written. Organisation per the
// paper; port widths and read timing are this design's choices.
module scratch_sram #(
  parameter int unsigned N_PROB = limo_pkg::N_PROB,
  parameter int unsigned N_CITY = limo_pkg::N_CITY
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [$clog2(N_PROB)-1:0]   wprob,
  input  logic                        wpar,
  input  logic [$clog2(N_CITY)-1:0]   wrow,
  input  logic [N_CITY-1:0]           wdata,
  input  logic                        re,
  input  logic [$clog2(N_PROB)-1:0]   rprob,
  input  logic                        rpar,
  input  logic [$clog2(N_CITY)-1:0]   rrow,
  output logic [N_CITY-1:0]           rdata
);

  localparam int unsigned DEPTH = N_PROB * 2 * N_CITY;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [N_CITY-1:0] mem [DEPTH];

  function automatic logic [AW-1:0] addr(logic [$clog2(N_PROB)-1:0] p, logic par,
                                         logic [$clog2(N_CITY)-1:0] row);
    return AW'((32'(p) * 2 + 32'(par)) * N_CITY + 32'(row));
  endfunction

  always_ff @(posedge clk) begin
    if (we) mem[addr(wprob, wpar, wrow)] <= wdata;
    if (re) rdata <= mem[addr(rprob, rpar, rrow)];
  end

endmodule
