// Self-checking test of hysteron_param_store with a small array: reset
// contents, single-entry writes in random order (every other entry must
// stay unchanged), overwrites, and a cycle with we = 0.
module tb_hysteron_param_store;
  import preisach_pkg::*;

  localparam int unsigned N  = 12;
  localparam int unsigned AW = $clog2(N);

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b0, we = 1'b0;
  logic [AW-1:0] waddr = '0;
  hyst_param_t   wdata = '0;
  hyst_param_t   params [N];
  hyst_param_t   model  [N];

  always #5 clk = ~clk;

  hysteron_param_store #(.N(N)) dut (.clk, .rst_n, .we, .waddr, .wdata, .params);

  function automatic hyst_param_t rand_param();
    hyst_param_t p;
    int a, b;
    a = int'($urandom_range(60000)) - 30000;
    b = a - int'($urandom_range(2000));
    p.alpha  = sample_t'(a);
    p.beta   = sample_t'(b);
    p.weight = weight_t'($urandom);
    p.y0     = $urandom_range(1) ? STATE_POS : STATE_NEG;
    return p;
  endfunction

  task automatic check_all(string when);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (params[i] !== model[i]) begin
        failures++;
        $display("FAIL %s entry %0d: got %h expected %h", when, i, params[i], model[i]);
      end
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      model[i] = '0;
      model[i].y0 = STATE_NEG;
    end
    #12 rst_n = 1'b1;
    check_all("after reset");
    for (int k = 0; k < 200; k++) begin
      int a;
      hyst_param_t p;
      a = int'($urandom_range(N - 1));
      p = rand_param();
      @(negedge clk);
      we = ($urandom_range(4) != 0);
      waddr = AW'(a); wdata = p;
      @(posedge clk); #1;
      if (we) model[a] = p;
      check_all("after write");
      we = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
