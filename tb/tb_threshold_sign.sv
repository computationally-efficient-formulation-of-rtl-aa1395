// Self-checking test of threshold_sign: the sign of x - thr for edge values
// (equal operands, extremes of the range where x - thr would overflow the
// operand width) and random pairs, for all three settings of sign(0).
module tb_threshold_sign;
  import preisach_pkg::*;

  int checks = 0, failures = 0;
  sample_t x, thr;
  state_t  s_zero, s_pos, s_neg;

  threshold_sign #(.ZERO_VALUE(STATE_ZERO)) dut_zero (.x(x), .thr(thr), .s(s_zero));
  threshold_sign #(.ZERO_VALUE(STATE_POS))  dut_pos  (.x(x), .thr(thr), .s(s_pos));
  threshold_sign #(.ZERO_VALUE(STATE_NEG))  dut_neg  (.x(x), .thr(thr), .s(s_neg));

  function automatic int ref_sign(int a, int b, int z);
    if (a > b) return 1;
    if (a < b) return -1;
    return z;
  endfunction

  task automatic check_pair(int a, int b);
    x = sample_t'(a); thr = sample_t'(b);
    #1;
    checks += 3;
    if (int'(s_zero) != ref_sign(a, b, 0))  begin failures++; $display("FAIL zero x=%0d thr=%0d s=%0d", a, b, s_zero); end
    if (int'(s_pos)  != ref_sign(a, b, 1))  begin failures++; $display("FAIL pos  x=%0d thr=%0d s=%0d", a, b, s_pos); end
    if (int'(s_neg)  != ref_sign(a, b, -1)) begin failures++; $display("FAIL neg  x=%0d thr=%0d s=%0d", a, b, s_neg); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, hi;
    lo = -(1 << (X_W-1));
    hi = (1 << (X_W-1)) - 1;
    check_pair(0, 0);
    check_pair(100, 100);
    check_pair(1, 0);
    check_pair(0, 1);
    check_pair(hi, lo);     // x - thr overflows X_W bits
    check_pair(lo, hi);
    check_pair(lo, lo);
    check_pair(hi, hi);
    check_pair(hi, -1);
    check_pair(lo, 1);
    for (int i = 0; i < 2000; i++) begin
      int a, b;
      a = lo + int'($urandom_range(hi - lo));
      b = (i % 4 == 0) ? a : lo + int'($urandom_range(hi - lo));
      check_pair(a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
