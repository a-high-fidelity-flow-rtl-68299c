// tb_geom_remat: self-checking test of the on-the-fly geometric factors.
// Random inverse Jacobians, determinants and quadrature weights are applied;
// the six outputs are compared with w_i*w_j*w_k*detJ*(Jinv Jinv^T) computed
// in binary64, within a few units in the last place.
module tb_geom_remat;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  fp_t jinv [3][3];
  fp_t detj, wi, wj, wk;
  geom_t g;

  geom_remat dut (.*);

  int checks = 0, failures = 0;

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real J [3][3], m [3][3], s, got [6], mx;
    int ra [6] = '{0, 0, 0, 1, 1, 2};
    int rb [6] = '{0, 1, 2, 1, 2, 2};
    for (int t = 0; t < 500; t++) begin
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        jinv[a][b] = from_real((a == b) ? urand(1.0, 8.0) : urand(-1.0, 1.0));
        J[a][b] = to_real(jinv[a][b]);
      end
      detj = from_real(urand(0.001, 0.2));
      wi = from_real(urand(0.02, 0.5)); wj = from_real(urand(0.02, 0.5)); wk = from_real(urand(0.02, 0.5));
      #1;
      s = to_real(wi) * to_real(wj) * to_real(wk) * to_real(detj);
      mx = 0.0;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        m[a][b] = 0.0;
        for (int c = 0; c < 3; c++) m[a][b] += J[a][c] * J[b][c];
        m[a][b] *= s;
        if (fabs(m[a][b]) > mx) mx = fabs(m[a][b]);
      end
      got = '{to_real(g.g11), to_real(g.g12), to_real(g.g13), to_real(g.g22), to_real(g.g23), to_real(g.g33)};
      for (int e = 0; e < 6; e++) begin
        checks++;
        if (!close(got[e], m[ra[e]][rb[e]], 0.0, 1.0e-6 * mx)) begin
          failures++;
          if (failures < 10) $display("FAIL t%0d entry %0d got %g exp %g", t, e, got[e], m[ra[e]][rb[e]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
