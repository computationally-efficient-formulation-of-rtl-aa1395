// Workload run of preisach_model at the size of the paper's real-time DSP
// evaluation: 210 relays (a 20 x 20 mesh, uniform weight 1, so f spans
// [-210, 210]) sampled at 2 kHz, each input applied for 120 s of model time
// (240000 samples):
//   phase A: a 1 Hz sinusoid of amplitude 1.05, i.e. 120 major loops;
//   phase B: white noise through a first-order low-pass with a 10 Hz
//            corner (pole exp(-2*pi*10/2000)), clipped to +-1.25.
// The noise is generated here from $urandom; its gain is this test's
// choice, set so that the input reaches beyond the mesh on both sides.
//
// Checks: every f against a reference relay-by-relay model with f_valid two
// cycles after its sample; in phase A, that every period after the first
// repeats the f sequence of the second sample by sample (the major loops
// lie on each other) and that f reaches +210 and -210; in phase B, that f
// visits both saturation values and values strictly between them.
// The clock runs one sample per cycle; the 2 kHz rate only sets how input
// frequencies map to samples.
module tb_preisach_dsp;
  import preisach_pkg::*;

  localparam int unsigned M    = 20;
  localparam int unsigned N    = M * (M + 1) / 2;   // 210
  localparam int unsigned AW   = $clog2(N);
  localparam int unsigned F_W  = W_W + $clog2(N + 1) + 1;
  localparam int          WGT  = 1;
  localparam real         FS   = 2000.0;
  localparam int          NS   = 240000;            // 120 s at 2 kHz
  localparam int          P    = 2000;              // 1 Hz period in samples

  int checks = 0, failures = 0;
  longint cycle = 0;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0, init = 1'b0, x_valid = 1'b0;
  logic [AW-1:0] cfg_addr = '0;
  hyst_param_t cfg_param = '0;
  sample_t x = '0;
  logic f_valid;
  logic signed [F_W-1:0] f;

  int r_alpha [N], r_beta [N], r_state [N];
  longint q_due [$];
  longint q_val [$];
  int n_up = 0, n_down = 0;
  longint loop_ref [P];

  always #5 clk = ~clk;

  preisach_model #(.N(N)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_param, .init, .x_valid, .x, .f_valid, .f
  );

  function automatic int q14(real v);
    return int'($floor(v * 16384.0 + 0.5));
  endfunction

  function automatic int grid(int k);
    return q14(-1.0 + real'(2 * k + 1) / real'(M));
  endfunction

  always @(posedge clk) begin
    #1;
    cycle++;
    if (q_due.size() > 0 && q_due[0] == cycle) begin
      checks++;
      if (!f_valid || longint'(f) != q_val[0]) begin
        failures++;
        if (failures < 20) $display("FAIL cycle %0d: f_valid=%0b f=%0d expected %0d", cycle, f_valid, f, q_val[0]);
      end
      void'(q_due.pop_front());
      void'(q_val.pop_front());
    end
  end

  task automatic send(int xi, output longint sum);
    @(negedge clk);
    x = sample_t'(xi); x_valid = 1'b1;
    sum = 0;
    for (int i = 0; i < N; i++) begin
      int nxt;
      if (xi <= r_beta[i])       nxt = -1;
      else if (xi >= r_alpha[i]) nxt = 1;
      else                       nxt = r_state[i];
      if (nxt > r_state[i]) n_up++;
      if (nxt < r_state[i]) n_down++;
      r_state[i] = nxt;
      sum += longint'(nxt) * WGT;
    end
    q_due.push_back(cycle + 2);
    q_val.push_back(sum);
    @(posedge clk);
    #2 x_valid = 1'b0;
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx, loop_mismatch, n_pos_sat, n_neg_sat, n_mid;
    longint s;
    real lp, a;
    #12 rst_n = 1'b1;
    idx = 0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j <= i; j++) begin
        @(negedge clk);
        cfg_we = 1'b1; cfg_addr = AW'(idx);
        cfg_param.alpha = sample_t'(grid(i)); cfg_param.beta = sample_t'(grid(j));
        cfg_param.weight = weight_t'(WGT); cfg_param.y0 = STATE_NEG;
        r_alpha[idx] = grid(i); r_beta[idx] = grid(j); r_state[idx] = -1;
        idx++;
      end
    @(negedge clk); cfg_we = 1'b0; init = 1'b1;
    @(negedge clk); init = 1'b0;

    // phase A: 120 major loops
    loop_mismatch = 0; n_pos_sat = 0; n_neg_sat = 0;
    for (int k = 0; k < NS; k++) begin
      send(q14(1.05 * $sin(2.0 * 3.14159265358979 * real'(k) / real'(P))), s);
      if (k / P == 1) loop_ref[k % P] = s;
      else if (k / P > 1 && loop_ref[k % P] != s) loop_mismatch++;
      if (s == longint'(N) * WGT)  n_pos_sat++;
      if (s == -longint'(N) * WGT) n_neg_sat++;
    end
    checks += 3;
    if (loop_mismatch != 0) begin failures++; $display("FAIL %0d samples off the repeated major loop", loop_mismatch); end
    if (n_pos_sat == 0) begin failures++; $display("FAIL sine phase never saturated up"); end
    if (n_neg_sat == 0) begin failures++; $display("FAIL sine phase never saturated down"); end
    $display("phase A: %0d samples, %0d at +sat, %0d at -sat", NS, n_pos_sat, n_neg_sat);

    // phase B: low-pass filtered white noise
    a = $exp(-2.0 * 3.14159265358979 * 10.0 / FS);
    lp = 0.0; n_pos_sat = 0; n_neg_sat = 0; n_mid = 0;
    for (int k = 0; k < NS; k++) begin
      real u;
      u = 11.0 * (real'($urandom_range(1000000)) / 1000000.0 - 0.5);
      lp = a * lp + (1.0 - a) * u;
      if (lp > 1.25)  lp = 1.25;
      if (lp < -1.25) lp = -1.25;
      send(q14(lp), s);
      if (s == longint'(N) * WGT)       n_pos_sat++;
      else if (s == -longint'(N) * WGT) n_neg_sat++;
      else                              n_mid++;
    end
    repeat (4) @(negedge clk);
    checks += 4;
    if (q_due.size() != 0) begin failures++; $display("FAIL outputs missing"); end
    if (n_pos_sat == 0) begin failures++; $display("FAIL noise phase never saturated up"); end
    if (n_neg_sat == 0) begin failures++; $display("FAIL noise phase never saturated down"); end
    if (n_mid == 0)     begin failures++; $display("FAIL noise phase never inside the loop"); end
    $display("phase B: %0d at +sat, %0d at -sat, %0d inside", n_pos_sat, n_neg_sat, n_mid);
    $display("relay switches: up %0d, down %0d", n_up, n_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
