// Scalar Preisach hysteresis model computed in parallel:
//
//     f(t) = sum_{i=1..N} W_i * y_i(x(t), alpha_i, beta_i, y_i(t0))
//
// N hysterons (non-ideal relays) share one input channel x and are all
// updated in the same clock cycle; a weighted sum of their states is the
// model output f. The default N = 3240 is the 80 x 80 Preisach-plane mesh
// (80 * 81 / 2 relays with alpha >= beta) of the paper's numerical study;
// the paper's DSP run used 210 relays (a 20 x 20 mesh), which fits in the
// same array with the remaining weights left at zero.
//
// Operation:
//  1. Load parameters: one hysteron per cycle, cfg_we with cfg_addr and
//     cfg_param (alpha, beta, weight, y0). Unwritten entries have weight 0.
//  2. Pulse init for one cycle: every relay's delay register takes its y0.
//  3. Present samples: x with x_valid for one cycle per sample, at any rate
//     up to one per clock. The relays take the sample at the next edge and
//     the weighted sum registers f one edge later, so f_valid rises two
//     clock cycles after x_valid: the model's sample time is twice the
//     clock period, as the paper expects of a hardware realisation.
//
// Parallel relays, the single shared input and the two-step timing follow
// the paper; the load port, init pulse, fixed-point formats (see
// preisach_pkg) and reset behaviour are this design's choices. init and
// x_valid in the same cycle: init wins and the sample is not taken into the
// relay states (it still produces an f_valid).
module preisach_model
  import preisach_pkg::*;
#(
  parameter int unsigned N   = 3240,
  parameter int unsigned AW  = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned F_W = W_W + $clog2(N + 1) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parameter load
  input  logic                  cfg_we,
  input  logic [AW-1:0]         cfg_addr,
  input  hyst_param_t           cfg_param,
  // initial state load
  input  logic                  init,
  // input sample stream
  input  logic                  x_valid,
  input  sample_t               x,
  // model output
  output logic                  f_valid,
  output logic signed [F_W-1:0] f
);

  hyst_param_t params [N];
  state_t      y_q    [N];
  weight_t     w      [N];
  logic        sum_valid;

  hysteron_param_store #(.N(N), .AW(AW)) u_params (
    .clk    (clk),
    .rst_n  (rst_n),
    .we     (cfg_we),
    .waddr  (cfg_addr),
    .wdata  (cfg_param),
    .params (params)
  );

  for (genvar i = 0; i < N; i++) begin : g_hyst
    hysteron u_hyst (
      .clk   (clk),
      .rst_n (rst_n),
      .init  (init),
      .en    (x_valid),
      .x     (x),
      .alpha (params[i].alpha),
      .beta  (params[i].beta),
      .y0    (params[i].y0),
      .y     (),          // the sum reads the registered state
      .y_q   (y_q[i])
    );
    assign w[i] = params[i].weight;
  end

  // the relay states are updated at the edge that takes the sample;
  // the sum of the updated states is formed in the following cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum_valid <= 1'b0;
    else        sum_valid <= x_valid;
  end

  weighted_sum #(.N(N), .F_W(F_W)) u_sum (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (sum_valid),
    .y         (y_q),
    .w         (w),
    .out_valid (f_valid),
    .f         (f)
  );

endmodule
