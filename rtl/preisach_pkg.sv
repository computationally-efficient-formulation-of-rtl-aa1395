// Shared types and constants of the parallel Preisach hysteresis model.
//
// The model input x and the relay thresholds alpha and beta are signed
// fixed-point numbers of X_W bits with X_FRAC fractional bits (Q2.14 by
// default, so the range [-2, 2) holds the normalised input domain [-1, 1]
// with room for overshoot). Hysteron weights are unsigned integers of W_W
// bits; their scale is free and sets the scale of the model output f.
// A relay state is a signed 2-bit number holding -1, 0 or +1; the two
// values a relay rests in are the constants STATE_NEG and STATE_POS, and
// ZERO is the common zero reference of the sign comparators.
package preisach_pkg;

  parameter int unsigned X_W    = 16;  // input and threshold width
  parameter int unsigned X_FRAC = 14;  // fractional bits of x, alpha, beta
  parameter int unsigned W_W    = 16;  // hysteron weight width

  typedef logic signed [X_W-1:0] sample_t;   // x, alpha, beta
  typedef logic        [W_W-1:0] weight_t;   // W_i (unsigned)
  typedef logic signed [1:0]     state_t;    // relay state -1, 0, +1

  localparam state_t STATE_NEG  = 2'sb11;    // -1
  localparam state_t STATE_ZERO = 2'sb00;    //  0
  localparam state_t STATE_POS  = 2'sb01;    // +1

  // Parameters of one hysteron: thresholds, weight and initial state.
  typedef struct packed {
    sample_t alpha;   // up-switching threshold
    sample_t beta;    // down-switching threshold, beta <= alpha
    weight_t weight;  // gain W_i
    state_t  y0;      // initial state y_i(t0)
  } hyst_param_t;

  // max and min of two relay states (the max and min blocks of the signal flow)
  function automatic state_t state_max(state_t a, state_t b);
    return (a > b) ? a : b;
  endfunction

  function automatic state_t state_min(state_t a, state_t b);
    return (a < b) ? a : b;
  endfunction

endpackage
