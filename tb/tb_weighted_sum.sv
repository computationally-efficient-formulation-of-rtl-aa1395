// Self-checking test of weighted_sum: f = sum W_i * y_i for random states
// in {-1, 0, +1} and random weights, including all weights at full scale
// with every state +1 and every state -1 (largest magnitudes). Checks the
// one-cycle latency of out_valid and that f holds when in_valid is low.
module tb_weighted_sum;
  import preisach_pkg::*;

  localparam int unsigned N   = 20;
  localparam int unsigned F_W = W_W + $clog2(N + 1) + 1;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  state_t  y [N];
  weight_t w [N];
  logic    out_valid;
  logic signed [F_W-1:0] f;
  longint  expected, held;

  always #5 clk = ~clk;

  weighted_sum #(.N(N)) dut (.clk, .rst_n, .in_valid, .y, .w, .out_valid, .f);

  task automatic apply(int mode);
    expected = 0;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      int s;
      unique case (mode)
        1: begin s = 1;  w[i] = '1; end
        2: begin s = -1; w[i] = '1; end
        default: begin s = int'($urandom_range(2)) - 1; w[i] = weight_t'($urandom); end
      endcase
      y[i] = state_t'(s);
      expected += longint'(s) * longint'(w[i]);
    end
    in_valid = 1'b1;
    @(posedge clk); #1;
    in_valid = 1'b0;
    checks += 2;
    if (out_valid !== 1'b1) begin failures++; $display("FAIL out_valid not set one cycle after in_valid"); end
    if (longint'(f) != expected) begin failures++; $display("FAIL f=%0d expected %0d", f, expected); end
    held = expected;
    // inputs change without in_valid: f must hold, out_valid must drop
    @(negedge clk);
    for (int i = 0; i < N; i++) y[i] = STATE_POS;
    @(posedge clk); #1;
    checks += 2;
    if (out_valid !== 1'b0) begin failures++; $display("FAIL out_valid stuck"); end
    if (longint'(f) != held) begin failures++; $display("FAIL f changed without in_valid"); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin y[i] = STATE_ZERO; w[i] = '0; end
    #12 rst_n = 1'b1;
    apply(1);
    apply(2);
    for (int k = 0; k < 500; k++) apply(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
