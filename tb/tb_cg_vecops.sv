// tb_cg_vecops: self-checking test of the CG vector unit.
//
// For random vectors x, r, p, w and weights c the three operations are run
// in turn (r.r.c, p.w.c, fused update) and compared with binary64 results:
// the reduction value and every x and r written back.  Cycle count n+1
// from start to done is checked, and an empty vector must finish at once
// with a zero result.
module tb_cg_vecops;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  localparam int ML = 64, LAW = $clog2(ML);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, x_we, r_we;
  vop_e op = VOP_DOT_RR;
  logic [LAW:0] n = '0;
  fp_t alpha = '0, x_i, r_i, p_i, w_i, c_i, x_wdata, r_wdata, acc;
  logic [LAW-1:0] idx;

  cg_vecops #(.MAX_LOCAL(ML)) dut (.*);

  fp_t X [ML], R [ML], P [ML], W [ML], C [ML];
  assign x_i = X[idx]; assign r_i = R[idx]; assign p_i = P[idx];
  assign w_i = W[idx]; assign c_i = C[idx];

  real ex [ML], er [ML];
  int checks = 0, failures = 0;

  always @(posedge clk) begin
    if (x_we && rst_n) begin
      X[idx] <= x_wdata;
      checks++;
      if (!close(to_real(x_wdata), ex[idx], 1.0e-6, 1.0e-6)) begin
        failures++; $display("FAIL x[%0d] got %g exp %g", idx, to_real(x_wdata), ex[idx]);
      end
    end
    if (r_we && rst_n) begin
      R[idx] <= r_wdata;
      checks++;
      if (!close(to_real(r_wdata), er[idx], 1.0e-6, 1.0e-6)) begin
        failures++; $display("FAIL r[%0d] got %g exp %g", idx, to_real(r_wdata), er[idx]);
      end
    end
  end

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  task automatic go(vop_e o, int nn, real expect_acc);
    longint c0;
    @(negedge clk);
    op = o; n = (LAW+1)'(nn); start = 1'b1; c0 = $time / 10;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if ($time / 10 - c0 != longint'(nn + 1)) begin
      failures++; $display("FAIL op %s cycles %0d expected %0d", o.name(), $time / 10 - c0, nn + 1);
    end
    checks++;
    if (!close(to_real(acc), expect_acc, 1.0e-5, 1.0e-6)) begin
      failures++; $display("FAIL op %s acc %g exp %g", o.name(), to_real(acc), expect_acc);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, a;
    int nn;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3; t++) begin
      nn = (t == 0) ? ML : $urandom_range(1, ML);
      for (int l = 0; l < ML; l++) begin
        X[l] = from_real(urand(-1.0, 1.0)); R[l] = from_real(urand(-1.0, 1.0));
        P[l] = from_real(urand(-1.0, 1.0)); W[l] = from_real(urand(-1.0, 1.0));
        C[l] = from_real(1.0 / real'($urandom_range(1, 8)));
      end
      s = 0.0;
      for (int l = 0; l < nn; l++) s += to_real(R[l]) * to_real(R[l]) * to_real(C[l]);
      go(VOP_DOT_RR, nn, s);
      s = 0.0;
      for (int l = 0; l < nn; l++) s += to_real(P[l]) * to_real(W[l]) * to_real(C[l]);
      go(VOP_DOT_PW, nn, s);
      a = urand(-2.0, 2.0);
      alpha = from_real(a);
      a = to_real(alpha);
      s = 0.0;
      for (int l = 0; l < nn; l++) begin
        ex[l] = to_real(X[l]) + a * to_real(P[l]);
        er[l] = to_real(R[l]) - a * to_real(W[l]);
        s += er[l] * er[l] * to_real(C[l]);
      end
      go(VOP_UPDATE, nn, s);
    end
    // empty vector
    @(negedge clk);
    op = VOP_DOT_RR; n = '0; start = 1'b1;
    @(negedge clk) start = 1'b0;
    checks++;
    if (!done || acc != '0) begin failures++; $display("FAIL empty vector"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
