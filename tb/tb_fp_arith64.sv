// tb_fp_arith64: self-checking test of the floating-point adder, multiplier
// and divider built for binary64 (EW = 11, MW = 52), the format of the
// double-precision accelerator builds.
//
// The simulator's real type is itself IEEE-754 binary64 with
// round-to-nearest-even, so every result is compared bit for bit with the
// real operation on the same operands.  Operands are normal numbers with
// random signs, mantissas and exponents within +-60 binades of 1.0, so no
// result over- or underflows.  A third of the additions use a second operand
// close to minus the first, to exercise cancellation and renormalisation;
// exact cancellation must give +0.
module tb_fp_arith64;
  localparam int EW = 11, MW = 52;

  logic [63:0] a, b, ys, yp, yq;
  int checks = 0, failures = 0;

  fp_add #(.EW(EW), .MW(MW)) u_add (.a(a), .b(b), .y(ys));
  fp_mul #(.EW(EW), .MW(MW)) u_mul (.a(a), .b(b), .y(yp));
  fp_div #(.EW(EW), .MW(MW)) u_div (.a(a), .b(b), .y(yq));

  function automatic logic [63:0] rnd_normal();
    logic [10:0] e;
    e = 11'(1023 + int'($urandom_range(0, 120)) - 60);
    return {1'($urandom_range(0, 1)), e, 20'($urandom), $urandom};
  endfunction

  task automatic check(string op, logic [63:0] got, real expr);
    logic [63:0] exp = $realtobits(expr);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s a=%h b=%h got %h exp %h", op, a, b, got, exp);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      a = rnd_normal();
      unique case (t % 3)
        0: b = rnd_normal();
        1: b = {~a[63], a[62:0]} ^ 64'($urandom_range(0, 255));
        default: b = {~a[63], a[62:0]};
      endcase
      #1;
      check("add", ys, $bitstoreal(a) + $bitstoreal(b));
      check("mul", yp, $bitstoreal(a) * $bitstoreal(b));
      check("div", yq, $bitstoreal(a) / $bitstoreal(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
