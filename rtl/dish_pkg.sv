// dish_pkg: sizes, the scheme encoding and small helpers shared by the
// discrete cell-signalling network simulator.
//
// NUM_ELEM is the number of model elements (and the largest number of
// rules/groups). The reference model is a T cell differentiation network; its
// size is not printed as a number, but 52 elements are said to be free in the
// SMLN runs (2^52 initial states) and nine more are forced (TCR_high, TCR_low,
// TGFbeta, AKT_off, CD28, PTEN, TSC, CD122, CD132), which gives the default 61.
// SB_RNG_BITS = 10 is the paper's n. LFSR width, counter width and the size of
// the inhibitor bank are this design's choices.
package dish_pkg;

  parameter int unsigned NUM_ELEM    = 61;
  parameter int unsigned LFSR_W      = 16;
  parameter int unsigned SB_RNG_BITS = 10;
  parameter int unsigned COUNT_W     = 16;
  parameter int unsigned NUM_INHIB   = 4;

  // Simulation scheme, chosen at run time inside the Rule Selector.
  // The grouped variants (RSQ-g) use the same hardware as RSQ, with a
  // group map that puts several elements under one rule index.
  typedef enum logic [1:0] {
    SCHEME_SMLN = 2'd0,   // simultaneous: every rule in every step
    SCHEME_RB   = 2'd1,   // round-based random-order sequential
    SCHEME_SB   = 2'd2    // step-based random-order sequential
  } scheme_e;

  // Why a run ended.
  typedef enum logic [1:0] {
    STOP_NONE   = 2'd0,
    STOP_STEADY = 2'd1,   // current state equals the state of the last check
    STOP_LIMIT  = 2'd2    // step or round budget used up
  } stop_e;

endpackage
