// stt_trng_cell: behavioural model of one STT-MTJ true-random-bit cell.
// This is a model of an analog/magnetic part, not synthesizable logic.
//
// The real cell is a differential sense amplifier with a switchable MTJ in
// one branch and a mid-point reference (two fixed MTJs, (R_P+R_AP)/2) in the
// other, plus a bidirectional write driver. A parallel MTJ (R_P) reads as 1,
// anti-parallel (R_AP) as 0. One bit takes a 20 ns cycle: 5 ns precharge,
// 5 ns read (RD high), then a 10 ns write (WRITE high) in which the driver
// pushes current through the MTJ in the direction that would flip the state
// just read (it is steered by OUT), sized for a 50% switching probability.
// Because both transitions are stochastic, no reset write is needed and each
// write yields a fresh bit.
//
// Model: `rd` makes the output latch transparent to the MTJ state; the latch
// holds while rd is low. At the falling edge of `write` the MTJ moves to the
// opposite of the latched output with probability 1/2. The coin is drawn
// from a per-cell 32-bit xorshift state seeded from $urandom and the SEED
// parameter, so that cells switch independently of each other (simulators
// may hand identical $urandom sequences to identical processes of
// different instances). Switching statistics versus current, pulse width
// and process corner are not modelled; the MTJ starts in a random state.
// Not synthesizable (simulation randomness).
module stt_trng_cell #(
  parameter int unsigned SEED = 1
) (
  input  logic rd,
  input  logic write,
  output logic out,
  output logic out_b
);

  logic        mtj;   // 1: parallel (R_P), 0: anti-parallel (R_AP)
  int unsigned st;    // switching randomness of this cell

  function automatic int unsigned xs(int unsigned x);
    x = x ^ (x << 13);
    x = x ^ (x >> 17);
    x = x ^ (x << 5);
    return x;
  endfunction

  initial begin
    st = xs(xs($urandom ^ (SEED * 32'h9E37_79B9)) | 32'd1);
    mtj = st[31];
  end

  always_latch begin
    if (rd) out = mtj;
  end

  assign out_b = ~out;

  always @(negedge write) begin
    st <= xs(st);
    if (st[31]) mtj <= ~out;
  end

endmodule
