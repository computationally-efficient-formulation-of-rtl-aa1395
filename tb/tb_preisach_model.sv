// End-to-end test of preisach_model with a small array (an 8 x 8 mesh on the
// Preisach plane, 36 relays, plus 4 entries left unwritten). Parameters are
// loaded through the configuration port in random order with random
// weights, both initial states are used, and the input is a random walk
// mixed with samples exactly on thresholds, fed back to back and with idle
// cycles between samples. Every f is compared with a reference that applies
// the relay's case definition (-1 at x <= beta, else +1 at x >= alpha, else
// hold; the order decides a relay with alpha = beta hit exactly)
// to every relay and sums W_i * y_i, and must appear exactly two cycles
// after its sample. Counts how often each mechanism happened (up and down
// switching, holding inside the band, both initial states, an initial state
// overridden by the first sample, unwritten entries, back-to-back and
// spaced samples) and fails a mechanism that never did.
module tb_preisach_model;
  import preisach_pkg::*;

  localparam int unsigned M   = 8;
  localparam int unsigned NR  = M * (M + 1) / 2;   // relays of the mesh
  localparam int unsigned N   = NR + 4;            // 4 unwritten entries
  localparam int unsigned AW  = $clog2(N);
  localparam int unsigned F_W = W_W + $clog2(N + 1) + 1;

  int checks = 0, failures = 0;
  longint cycle = 0;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0, init = 1'b0, x_valid = 1'b0;
  logic [AW-1:0] cfg_addr = '0;
  hyst_param_t cfg_param = '0;
  sample_t x = '0;
  logic f_valid;
  logic signed [F_W-1:0] f;

  // reference model
  int r_alpha [N], r_beta [N], r_w [N], r_y0 [N], r_state [N];

  // expected outputs: due cycle and value
  longint q_due [$];
  longint q_val [$];

  // mechanism counters
  int n_up = 0, n_down = 0, n_hold = 0, n_init_pos = 0, n_init_neg = 0;
  int n_override = 0, n_unused = 0, n_b2b = 0, n_spaced = 0, n_on_threshold = 0;
  bit last_was_sample = 0, first_after_init = 0;

  always #5 clk = ~clk;

  preisach_model #(.N(N)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_param, .init, .x_valid, .x, .f_valid, .f
  );

  function automatic int grid(int k);
    // cell centre -1 + (2k+1)/M in Q2.14, rounded
    return int'($floor((-1.0 + real'(2 * k + 1) / real'(M)) * 16384.0 + 0.5));
  endfunction

  // output monitor: f_valid only when due, with the expected value
  always @(posedge clk) begin
    #1;
    cycle++;
    if (q_due.size() > 0 && q_due[0] == cycle) begin
      checks++;
      if (!f_valid || longint'(f) != q_val[0]) begin
        failures++;
        $display("FAIL cycle %0d: f_valid=%0b f=%0d expected %0d", cycle, f_valid, f, q_val[0]);
      end
      void'(q_due.pop_front());
      void'(q_val.pop_front());
    end else if (rst_n) begin
      checks++;
      if (f_valid) begin failures++; $display("FAIL cycle %0d: unexpected f_valid", cycle); end
    end
  end

  task automatic load(int idx, int a, int b, int w, int y0);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = AW'(idx);
    cfg_param.alpha = sample_t'(a); cfg_param.beta = sample_t'(b);
    cfg_param.weight = weight_t'(w); cfg_param.y0 = state_t'(y0);
    r_alpha[idx] = a; r_beta[idx] = b; r_w[idx] = w; r_y0[idx] = y0;
    @(posedge clk);
    #2 cfg_we = 1'b0;
  endtask

  task automatic do_init();
    @(negedge clk);
    init = 1'b1;
    for (int i = 0; i < N; i++) begin
      r_state[i] = r_y0[i];
      if (r_w[i] != 0) begin
        if (r_y0[i] > 0) n_init_pos++; else n_init_neg++;
      end
    end
    @(posedge clk);
    #2 init = 1'b0;
    first_after_init = 1;
    last_was_sample = 0;
  endtask

  task automatic send(int xi, int gap);
    longint sum;
    repeat (gap) begin
      @(negedge clk);
      last_was_sample = 0;
    end
    @(negedge clk);
    if (last_was_sample) n_b2b++; else n_spaced++;
    x = sample_t'(xi); x_valid = 1'b1;
    sum = 0;
    for (int i = 0; i < N; i++) begin
      int nxt;
      if (xi == r_alpha[i] || xi == r_beta[i]) n_on_threshold++;
      if (xi <= r_beta[i])       nxt = -1;
      else if (xi >= r_alpha[i]) nxt = 1;
      else begin nxt = r_state[i]; n_hold++; end
      if (r_w[i] != 0) begin
        if (nxt > r_state[i]) n_up++;
        if (nxt < r_state[i]) n_down++;
        if (first_after_init && nxt != r_y0[i]) n_override++;
      end
      r_state[i] = nxt;
      sum += longint'(nxt) * longint'(r_w[i]);
    end
    first_after_init = 0;
    q_due.push_back(cycle + 2);
    q_val.push_back(sum);
    @(posedge clk);
    #2 x_valid = 1'b0;
    last_was_sample = 1;
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [NR];
    int idx, xi;
    for (int i = 0; i < N; i++) begin
      r_alpha[i] = 0; r_beta[i] = 0; r_w[i] = 0; r_y0[i] = -1; r_state[i] = -1;
    end
    #12 rst_n = 1'b1;

    // load the mesh in a shuffled address order
    for (int i = 0; i < NR; i++) order[i] = i;
    for (int i = NR - 1; i > 0; i--) begin
      int j, t;
      j = int'($urandom_range(i)); t = order[i]; order[i] = order[j]; order[j] = t;
    end
    idx = 0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j <= i; j++) begin
        load(order[idx], grid(i), grid(j), 1 + int'($urandom_range(999)),
             $urandom_range(1) ? 1 : -1);
        idx++;
      end
    for (int i = NR; i < N; i++) if (r_w[i] == 0) n_unused++;

    for (int run = 0; run < 6; run++) begin
      do_init();
      xi = int'($urandom_range(39000)) - 19500;
      for (int k = 0; k < 300; k++) begin
        int sel;
        sel = int'($urandom_range(9));
        if (sel == 0)      xi = grid(int'($urandom_range(M - 1)));
        else if (sel == 1) xi = (int'($urandom_range(1)) == 1) ? 19660 : -19660;   // +-1.2
        else               xi = xi + int'($urandom_range(6000)) - 3000;
        if (xi > 19660)  xi = 19660;
        if (xi < -19660) xi = -19660;
        send(xi, ($urandom_range(2) == 0) ? int'($urandom_range(3)) : 0);
      end
    end
    repeat (4) @(negedge clk);
    checks++;
    if (q_due.size() != 0) begin failures++; $display("FAIL %0d outputs never appeared", q_due.size()); end

    need("relay switched up", n_up);
    need("relay switched down", n_down);
    need("relay held inside band", n_hold);
    need("initial state +1", n_init_pos);
    need("initial state -1", n_init_neg);
    need("initial state overridden", n_override);
    need("sample on a threshold", n_on_threshold);
    need("unwritten entry", n_unused);
    need("back-to-back samples", n_b2b);
    need("spaced samples", n_spaced);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
