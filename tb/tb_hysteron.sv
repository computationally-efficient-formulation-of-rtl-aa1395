// Self-checking test of hysteron against the relay's case definition:
// +1 if x >= alpha, -1 if x <= beta, otherwise the previous state.
// Random thresholds and input walks, samples that land exactly on a
// threshold, init loading of y0 (both values), hold while en = 0, and a
// second instance with the plain sign function, where a sample exactly at
// alpha from state -1 gives max(-1, 0) = 0 and min(+1, 0) = 0.
module tb_hysteron;
  import preisach_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, en = 1'b0;
  sample_t x = '0, alpha = '0, beta = '0;
  state_t  y0 = STATE_NEG;
  state_t  y, y_q, yp, yp_q;
  int      model;   // reference state

  always #5 clk = ~clk;

  hysteron dut (.clk, .rst_n, .init, .en, .x, .alpha, .beta, .y0, .y(y), .y_q(y_q));
  hysteron #(.ALPHA_SIGN0(STATE_ZERO), .BETA_SIGN0(STATE_ZERO)) dut_plain
    (.clk, .rst_n, .init, .en, .x, .alpha, .beta, .y0, .y(yp), .y_q(yp_q));

  function automatic int relay(int xi, int a, int b, int prev);
    if (xi <= b) return -1;   // checked first, as listed: decides alpha == beta
    if (xi >= a) return 1;
    return prev;
  endfunction

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (x=%0d alpha=%0d beta=%0d)", what, got, exp, x, alpha, beta);
    end
  endtask

  // one sample: drive at negedge, check combinational y, clock it in, check y_q
  task automatic sample(int xi, bit take);
    @(negedge clk);
    x  = sample_t'(xi);
    en = take;
    #1;
    expect_eq("y", int'(y), relay(xi, int'(alpha), int'(beta), model));
    @(posedge clk); #1;
    if (take) model = relay(xi, int'(alpha), int'(beta), model);
    expect_eq("y_q", int'(y_q), model);
    en = 1'b0;
  endtask

  task automatic do_init(state_t v);
    @(negedge clk);
    y0 = v; init = 1'b1;
    @(posedge clk); #1;
    init = 1'b0;
    model = int'(v);
    expect_eq("y_q after init", int'(y_q), model);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = -1;
    #12 rst_n = 1'b1;
    expect_eq("reset state", int'(y_q), -1);

    // fixed thresholds: alpha = 0.5, beta = -0.25 in Q2.14
    alpha = 16'sd8192; beta = -16'sd4096;
    do_init(STATE_POS);
    sample(0, 1);           // inside band: keeps +1
    sample(-4096, 1);       // exactly beta: switches to -1
    sample(0, 1);           // inside: keeps -1
    sample(8191, 1);        // just below alpha: keeps -1
    sample(8192, 1);        // exactly alpha: switches to +1
    sample(-4095, 1);       // just above beta: keeps +1
    sample(-20000, 0);      // en = 0: state must not change
    do_init(STATE_NEG);
    sample(1000, 1);        // inside: keeps -1 from y0
    do_init(STATE_POS);
    sample(-30000, 1);      // outside band on first sample: y0 overridden

    // plain-sign instance: x exactly at alpha from -1 yields 0
    @(negedge clk); y0 = STATE_NEG; init = 1'b1; @(posedge clk); #1; init = 1'b0; model = -1;
    @(negedge clk); x = alpha; #1;
    expect_eq("plain sign at alpha", int'(yp), 0);
    x = sample_t'(int'(alpha) + 1); #1;
    expect_eq("plain sign above alpha", int'(yp), 1);

    // random thresholds and random walks
    for (int t = 0; t < 200; t++) begin
      int a, b, xi;
      a = int'($urandom_range(40000)) - 20000;
      b = a - int'($urandom_range(12000));
      @(negedge clk); alpha = sample_t'(a); beta = sample_t'(b);
      do_init(($urandom_range(1) == 1) ? STATE_POS : STATE_NEG);
      xi = int'($urandom_range(40000)) - 20000;
      for (int k = 0; k < 50; k++) begin
        int sel;
        sel = int'($urandom_range(5));
        unique case (sel)
          0: xi = a;
          1: xi = b;
          default: xi = xi + int'($urandom_range(8000)) - 4000;
        endcase
        if (xi > 32767) xi = 32767;
        if (xi < -32768) xi = -32768;
        sample(xi, $urandom_range(7) != 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
