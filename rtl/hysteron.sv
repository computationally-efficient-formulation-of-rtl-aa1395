// Preisach hysteron (non-ideal relay) in the algebraic form
//
//     y(t) = min[ sign(x - beta), max[ y(t-), sign(x - alpha) ] ]
//
// Two threshold comparators (difference and sign) feed a max block, which
// also receives the previous state y(t-) from a one-sample delay (z^-1), and
// a min block that gives the new state y. The delay register is loaded with
// the stored initial state y0 when init is pulsed and captures y on every
// input sample (en). Inputs outside [beta, alpha] overwrite any initial
// state on the first sample, which gives the initial-state rule of the
// paper without extra logic.
//
// y is combinational from x and the stored state: it is valid in the cycle
// x is presented. y_q is the delay register, i.e. y of the last sample
// taken with en = 1, and is available one cycle after that sample.
//
// The paper leaves sign(0) open; with the defaults (+1 on the alpha branch,
// -1 on the beta branch) the relay switches up at x >= alpha and down at
// x <= beta exactly as in the relay's defining case list, and y only takes
// the values -1 and +1. Setting both to 0 gives the plain sign function;
// y can then rest at 0 when x lands exactly on a threshold. Reset clears the
// state to -1; this reset value is this design's choice.
module hysteron
  import preisach_pkg::*;
#(
  parameter state_t ALPHA_SIGN0 = STATE_POS,  // sign(x - alpha) at x == alpha
  parameter state_t BETA_SIGN0  = STATE_NEG   // sign(x - beta)  at x == beta
) (
  input  logic    clk,
  input  logic    rst_n,   // asynchronous, active low: state <= -1
  input  logic    init,    // load the delay register with y0
  input  logic    en,      // sample strobe: delay register <= y
  input  sample_t x,
  input  sample_t alpha,
  input  sample_t beta,
  input  state_t  y0,
  output state_t  y,       // current state, combinational
  output state_t  y_q      // registered state y(t-)
);

  state_t s_alpha, s_beta, up;

  threshold_sign #(.ZERO_VALUE(ALPHA_SIGN0)) u_sign_alpha (.x(x), .thr(alpha), .s(s_alpha));
  threshold_sign #(.ZERO_VALUE(BETA_SIGN0))  u_sign_beta  (.x(x), .thr(beta),  .s(s_beta));

  always_comb begin
    up = state_max(y_q, s_alpha);
    y  = state_min(s_beta, up);
  end

  // z^-1: sample-and-hold of the output, fed back to the max block
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    y_q <= STATE_NEG;
    else if (init) y_q <= y0;
    else if (en)   y_q <= y;
  end

endmodule
