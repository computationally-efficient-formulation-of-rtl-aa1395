// Weighted summation of the hysteron outputs, f = sum_i W_i * y_i.
//
// Each relay state y_i is -1, 0 or +1, so the gain stage needs no
// multiplier: the product is +W_i, 0 or -W_i, selected by the state. All N
// products are added in one combinational sum and the result is registered.
// A sample marked by in_valid gives f and out_valid one clock later. The
// sum is written as a plain loop and left to synthesis to build as an adder
// tree; it is not pipelined, which suits the low sampling rates of the
// target applications but limits the clock frequency for large N.
//
// The output is wide enough for N weights of W_W bits at full scale, so it
// never overflows: F_W = W_W + clog2(N) + 1 bits, signed.
module weighted_sum
  import preisach_pkg::*;
#(
  parameter int unsigned N   = 3240,
  parameter int unsigned F_W = W_W + $clog2(N + 1) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  state_t                y [N],
  input  weight_t               w [N],
  output logic                  out_valid,
  output logic signed [F_W-1:0] f
);

  logic signed [F_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < N; i++) begin
      unique case (y[i])
        STATE_POS: sum = sum + F_W'(w[i]);
        STATE_NEG: sum = sum - F_W'(w[i]);
        default:   ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      f         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) f <= sum;
    end
  end

endmodule
