// tb_fp_arith: self-checking test of the floating-point adder, multiplier
// and divider.  Random operands of mixed signs and magnitudes are applied;
// results are compared with binary64 arithmetic on the same operands,
// within one unit in the last place of the target format, plus exact
// checks of cancellation to zero and of operations with zero.
module tb_fp_arith;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  fp_t a, b, ys, yp, yq;
  int checks = 0, failures = 0;

  fp_add u_add (.a(a), .b(b), .y(ys));
  fp_mul u_mul (.a(a), .b(b), .y(yp));
  fp_div u_div (.a(a), .b(b), .y(yq));

  localparam real ULP = 1.0 / real'(1 << FP_MW);

  task automatic chk(string what, real got, real exp);
    checks++;
    if (!close(got, exp, 2.0 * ULP, 1.0e-30)) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  function automatic real rnd_val();
    real m;
    int  ex;
    m  = real'($urandom_range(1, 1000000)) / 1000000.0;
    ex = int'($urandom_range(0, 20)) - 10;
    m  = m * (2.0 ** ex);
    return ($urandom_range(0, 1) == 1) ? -m : m;
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      a = from_real(rnd_val());
      b = from_real(rnd_val());
      if (t % 7 == 0) b = from_real(-to_real(a) * (1.0 + real'($urandom_range(0, 3)) * ULP));
      #1;
      chk("add", to_real(ys), to_real(a) + to_real(b));
      chk("mul", to_real(yp), to_real(a) * to_real(b));
      chk("div", to_real(yq), to_real(a) / to_real(b));
    end
    // exact cases
    a = from_real(1.5); b = from_real(-1.5); #1;
    checks++; if (ys != '0) failures++;
    a = '0; b = from_real(3.25); #1;
    checks++; if (ys != b) failures++;
    checks++; if (yp != '0) failures++;
    checks++; if (yq != '0) failures++;
    // round to nearest, ties to even: 1 + ulp/2 -> 1 ; (1+ulp) + ulp/2 -> 1+2ulp
    a = from_real(1.0); b = from_real(ULP / 2.0); #1;
    checks++; if (ys != from_real(1.0)) failures++;
    a = from_real(1.0 + ULP); #1;
    checks++; if (ys != from_real(1.0 + 2.0 * ULP)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
