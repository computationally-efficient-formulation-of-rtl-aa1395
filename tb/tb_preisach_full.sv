// Full-size run of preisach_model at its default size (3240 relays): the
// 80 x 80 mesh on the Preisach plane with a uniform density, i.e. every
// relay has the same weight (20, so f spans [-64800, 64800] and f / 64800
// spans [-1, 1]), driven by a sinusoid whose amplitude falls linearly from
// 1.05 to 0 over six periods. This produces the nested minor loops that
// close in towards the origin. Mesh thresholds are cell centres
// -1 + (2k+1)/80 in Q2.14.
//
// Checks: every f against a reference relay-by-relay model, f_valid two
// cycles after each sample, saturation at +64800 at the first positive
// peak (every relay up), and that each later positive and negative turning
// point of f has a smaller magnitude than the one before (the loops are
// nested). Counts up and down switches and fails if either never happens.
module tb_preisach_full;
  import preisach_pkg::*;

  localparam int unsigned M    = 80;
  localparam int unsigned N    = M * (M + 1) / 2;   // 3240, the model's default
  localparam int unsigned AW   = $clog2(N);
  localparam int unsigned F_W  = W_W + $clog2(N + 1) + 1;
  localparam int          WGT  = 20;
  localparam int          P    = 400;               // samples per period
  localparam int          NPER = 6;

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
  longint f_ref [NPER * P];

  always #5 clk = ~clk;

  preisach_model dut (
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx;
    longint prev_max, prev_min, s;
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

    for (int k = 0; k < NPER * P; k++) begin
      real amp;
      amp = 1.05 * (1.0 - real'(k) / real'(NPER * P));
      send(q14(amp * $sin(2.0 * 3.14159265358979 * real'(k) / real'(P))), s);
      f_ref[k] = s;
    end
    repeat (4) @(negedge clk);
    checks++;
    if (q_due.size() != 0) begin failures++; $display("FAIL outputs missing"); end

    // saturation at the first positive peak
    checks++;
    if (f_ref[P / 4] != longint'(N) * WGT) begin
      failures++; $display("FAIL first peak f=%0d, expected %0d", f_ref[P / 4], longint'(N) * WGT);
    end
    // turning points shrink period by period
    prev_max = longint'(N) * WGT + 1;
    prev_min = -prev_max;
    for (int p = 0; p < NPER; p++) begin
      longint mx, mn;
      mx = f_ref[p * P + P / 4];
      mn = f_ref[p * P + 3 * P / 4];
      $display("period %0d: f at positive peak %0d, at negative peak %0d", p, mx, mn);
      checks += 2;
      if (!(mx <= prev_max)) begin failures++; $display("FAIL positive turning point grew"); end
      if (!(mn >= prev_min)) begin failures++; $display("FAIL negative turning point grew"); end
      prev_max = mx; prev_min = mn;
    end
    checks += 2;
    if (n_up == 0)   begin failures++; $display("FAIL no up switch"); end
    if (n_down == 0) begin failures++; $display("FAIL no down switch"); end
    $display("relay switches: up %0d, down %0d", n_up, n_down);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
