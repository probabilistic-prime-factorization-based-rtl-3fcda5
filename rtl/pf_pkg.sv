// Shared constants and types of the probabilistic factorization machine.
//
// The machine searches for the two prime factors X and Y of a semiprime N
// with a bank of probabilistic bits (p-bits) that sample X in one clock and
// Y in the next. This package holds the enumerations the blocks share: the
// sampling phase, the candidate-sieve selection and the run state. The
// encodings are this design's own.
package pf_pkg;

  // Which factor register the current clock cycle samples.
  typedef enum logic {
    PH_X = 1'b0,
    PH_Y = 1'b1
  } phase_e;

  // Which neighbour of X (or Y) the candidate sieve picked.
  typedef enum logic [2:0] {
    SEL_P0 = 3'd0,  // X
    SEL_P2 = 3'd1,  // X + 2
    SEL_M2 = 3'd2,  // X - 2
    SEL_P4 = 3'd3,  // X + 4
    SEL_M4 = 3'd4,  // X - 4 (all four others divisible by 3, 5 or 7)
    SEL_OFF = 3'd5  // sieve disabled, X passed on
  } sieve_sel_e;

  // Run state of the annealing controller.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,
    ST_INIT = 2'd1,
    ST_RUN  = 2'd2,
    ST_DONE = 2'd3
  } run_state_e;

endpackage
