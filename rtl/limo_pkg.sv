// limo_pkg: sizes, FSM state encoding, state durations and the annealing
// decrement schedule shared by the LIMO macro.
//
// The macro holds five independent TSPs of up to 16 cities in an 80x80
// crossbar: each problem owns 16 rows; per row, columns 0..63 hold four
// 16-column bit planes of the 4-bit distance matrix (MSB plane first) and
// columns 64..79 hold the one-hot spin (tour) storage. These numbers, the
// state durations and the slope tables are the paper's; the state encoding
// and the behaviour beyond the last printed interval of a slope table are
// this design's choices.
package limo_pkg;

  localparam int unsigned N_PROB   = 5;                      // concurrent TSPs
  localparam int unsigned N_CITY   = 16;                     // cities per TSP
  localparam int unsigned W_BITS   = 4;                      // distance precision
  localparam int unsigned ROWS     = N_PROB * N_CITY;        // 80
  localparam int unsigned COLS     = N_CITY * W_BITS + N_CITY; // 80
  localparam int unsigned SPIN_COL = N_CITY * W_BITS;        // first spin column (64)
  localparam int unsigned RG_BITS  = 16;                     // global random word
  localparam int unsigned CUR_W    = 8;                      // signed column current width
  localparam int unsigned SUM_W    = 10;                     // tour length (16 edges x 15)

  // Cycles spent in each state (supplementary Table S1).
  localparam int unsigned DUR_PRG_ROW  = ROWS;  // one row per clock
  localparam int unsigned DUR_GEN      = 1;
  localparam int unsigned DUR_LEN      = 6;
  localparam int unsigned DUR_SS_RD    = 2;
  localparam int unsigned DUR_W_RD     = 1;
  localparam int unsigned DUR_STO_SOLN = 2;
  localparam int unsigned DUR_LAST     = 1;
  localparam int unsigned DUR_AI_RD    = 1;

  typedef enum logic [3:0] {
    ST_IDLE      = 4'd0,
    ST_PRG_ROW   = 4'd1,
    ST_GEN       = 4'd2,
    ST_LEN       = 4'd3,
    ST_SS_RD     = 4'd4,
    ST_W_RD      = 4'd5,
    ST_STO_SOLN  = 4'd6,
    ST_LAST_CITY = 4'd7,
    ST_AI_RD     = 4'd8
  } state_t;

  // Decay schedule selector: the two geometric rates the macro supports.
  typedef enum logic {
    SCHED_9995 = 1'b0,   // beta = 0.9995
    SCHED_995  = 1'b1    // beta = 0.995
  } sched_t;

  // Piecewise-constant decrement of the reference word for pass number
  // `pass` (passes counted from 0). Intervals and slopes are those of
  // supplementary Table S2; past the last printed interval the last slope
  // is kept until the word runs out.
  function automatic logic [3:0] slope_for_pass(sched_t sched, logic [15:0] pass);
    if (sched == SCHED_9995) begin
      if      (pass < 16'd267)  return 4'd10;
      else if (pass < 16'd575)  return 4'd8;
      else if (pass < 16'd940)  return 4'd7;
      else if (pass < 16'd1386) return 4'd5;
      else if (pass < 16'd1961) return 4'd4;
      else if (pass < 16'd2772) return 4'd3;
      else if (pass < 16'd4158) return 4'd2;
      else                      return 4'd1;
    end else begin
      if      (pass < 16'd27)   return 4'd10;
      else if (pass < 16'd57)   return 4'd8;
      else if (pass < 16'd94)   return 4'd7;
      else if (pass < 16'd138)  return 4'd5;
      else if (pass < 16'd196)  return 4'd4;
      else if (pass < 16'd277)  return 4'd3;
      else                      return 4'd2;
    end
  endfunction

endpackage
