// Threshold comparator of one hysteron branch: a summation block that forms
// d = x - thr, followed by a sign operator that returns -1, 0 or +1.
//
// This is the "Sigma then sign" pair that appears twice in the hysteron
// signal flow, once with alpha and once with beta. The difference is formed
// one bit wider than the operands so it cannot overflow. The value returned
// for d == 0 is a parameter: the plain sign function gives 0, but a hysteron
// that must switch exactly at its thresholds (x >= alpha gives +1, x <= beta
// gives -1) uses +1 on its alpha branch and -1 on its beta branch; that
// choice belongs to this design, the paper does not define sign(0).
//
// Purely combinational; no clock.
module threshold_sign
  import preisach_pkg::*;
#(
  parameter state_t ZERO_VALUE = STATE_ZERO  // sign(0)
) (
  input  sample_t x,     // model input
  input  sample_t thr,   // threshold (alpha or beta)
  output state_t  s      // sign(x - thr)
);

  logic signed [X_W:0] diff;

  always_comb begin
    diff = {x[X_W-1], x} - {thr[X_W-1], thr};
    if (diff > 0)       s = STATE_POS;
    else if (diff < 0)  s = STATE_NEG;
    else                s = ZERO_VALUE;
  end

endmodule
