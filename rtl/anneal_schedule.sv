// anneal_schedule: the global stochastic gate and its annealing schedule.
//
// A 16-bit reference word r_ref sets the probability of the global gate:
// the gate bit is s_g = [r_g < r_ref], where r_g is a uniformly distributed
// 16-bit random word, so s_g is 1 with probability r_ref / 2^16. The word is
// loaded with r_ref_init on `init` (e.g. floor(p0 * 2^16)). At every `gen`
// (the FSM's GEN state, once per pass) the gate is evaluated against the
// current word, registered in g_bit, and the word is then lowered by the
// slope of the current pass taken from the selected piecewise-constant
// table (limo_pkg::slope_for_pass), which approximates a geometric decay of
// rate 0.9995 or 0.995. `exhausted` is high when the word has fallen below
// the next decrement; the controller ends annealing then.
//
// Comparison, decrement and exhaustion rule follow the paper; comparing
// before decrementing within a GEN is this design's choice.
module anneal_schedule
#(
  parameter int unsigned RG_BITS = limo_pkg::RG_BITS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               init,
  input  logic [RG_BITS-1:0] r_ref_init,
  input  limo_pkg::sched_t   sched,
  input  logic               gen,
  input  logic [RG_BITS-1:0] r_g,
  output logic               g_bit_now,
  output logic               g_bit,
  output logic [RG_BITS-1:0] r_ref,
  output logic [15:0]        pass_cnt,
  output logic               exhausted
);

  import limo_pkg::*;

  logic [3:0] slope;

  assign slope     = slope_for_pass(sched, pass_cnt);
  assign g_bit_now = (r_g < r_ref);
  assign exhausted = (r_ref < RG_BITS'(slope));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_ref    <= '0;
      pass_cnt <= '0;
      g_bit    <= 1'b0;
    end else if (init) begin
      r_ref    <= r_ref_init;
      pass_cnt <= '0;
      g_bit    <= 1'b0;
    end else if (gen) begin
      g_bit    <= g_bit_now;
      r_ref    <= exhausted ? '0 : r_ref - RG_BITS'(slope);
      pass_cnt <= pass_cnt + 16'd1;
    end
  end

endmodule
