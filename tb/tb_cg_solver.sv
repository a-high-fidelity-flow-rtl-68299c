// tb_cg_solver: end-to-end test of the spectral-element CG solver at its
// default parameters (N = 7, capacity 32768 elements).
//
// The testbench builds a real problem: the unit cube split into EX x EY x EZ
// brick elements, Gauss-Lobatto-Legendre points and the spectral
// differentiation matrix of order N (computed here by Newton iteration on
// the Legendre polynomials), the diagonal geometric factors of brick
// elements, the global numbering of shared points, the inverse
// multiplicities c and the Dirichlet boundary flags.  The right-hand side is
// a random continuous field that is zero on the boundary.
//
// Run 1 stops on the iteration limit after ITERS iterations; x and rho are
// compared with the same CG schedule evaluated here in binary64.  Run 2
// continues until rho falls below a tolerance; the solver must report
// convergence and its x must match a binary64 CG solved to the same
// tolerance.  The testbench also counts how often each mechanism of the
// design occurs (element-stream stalls, fused p updates, points summed by
// gather-scatter, masked points, both stop conditions) and fails any that
// never happens.  Cycle counts per iteration are checked against the
// timing formula of the top level.
module tb_cg_solver;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  localparam int N   = 7;
  localparam int NP  = N + 1;
  localparam int NP3 = NP * NP * NP;
  localparam int EX = 2, EY = 2, EZ = 2;
  localparam int NE  = EX * EY * EZ;
  localparam int NL  = NE * NP3;
  localparam int GX = EX * N + 1, GY = EY * N + 1, GZ = EZ * N + 1;
  localparam int NG  = GX * GY * GZ;
  localparam int ITERS = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  cg_solver dut (
    .clk, .rst_n,
    .h_we, .h_sel, .h_addr, .h_wdata, .h_rsel, .h_raddr, .h_rdata,
    .start, .num_elems, .num_global, .max_iter, .tol,
    .busy, .done, .iter_count, .rho, .converged
  );

  localparam int LAW = $clog2(32768 * NP3);
  logic           h_we = 1'b0, start = 1'b0;
  sel_e           h_sel = SEL_X, h_rsel = SEL_X;
  logic [LAW-1:0] h_addr = '0, h_raddr = '0;
  fp_t            h_wdata = '0, h_rdata, tol = '0, rho;
  logic [$clog2(32768+1)-1:0] num_elems = '0;
  logic [LAW:0]   num_global = '0;
  logic [15:0]    max_iter = '0, iter_count;
  logic           busy, done, converged;

  int checks = 0, failures = 0;

  // ------------------------------------------------------------ problem
  real xg [NP], wq [NP], D [NP][NP];
  int  gid [NL];
  bit  msk [NL];
  real c [NL], G [NL][6], b [NL];

  function automatic real legendre(int n, real x);
    real p0 = 1.0, p1 = x, p2;
    if (n == 0) return 1.0;
    for (int k = 2; k <= n; k++) begin
      p2 = ((2*k - 1) * x * p1 - (k - 1) * p0) / k;
      p0 = p1; p1 = p2;
    end
    return p1;
  endfunction

  task automatic gll();
    real x, xo, pn, pm;
    for (int i = 0; i <= N; i++) begin
      x = -$cos(3.14159265358979323846 * i / N);
      for (int it = 0; it < 100; it++) begin
        xo = x;
        pn = legendre(N, x); pm = legendre(N - 1, x);
        if (i != 0 && i != N) x = xo - (x * pn - pm) / ((N + 1) * pn);
      end
      xg[i] = x;
      wq[i] = 2.0 / (N * (N + 1) * legendre(N, x) ** 2);
    end
    for (int i = 0; i <= N; i++) for (int j = 0; j <= N; j++) begin
      if (i != j) D[i][j] = legendre(N, xg[i]) / (legendre(N, xg[j]) * (xg[i] - xg[j]));
      else if (i == 0) D[i][j] = -N * (N + 1) / 4.0;
      else if (i == N) D[i][j] = N * (N + 1) / 4.0;
      else D[i][j] = 0.0;
      D[i][j] = to_real(from_real(D[i][j]));
    end
  endtask

  task automatic mesh();
    int mult [NG];
    real bg [NG];
    real hx = 1.0 / EX, hy = 1.0 / EY, hz = 1.0 / EZ, dj;
    for (int g = 0; g < NG; g++) begin
      mult[g] = 0;
      bg[g] = to_real(from_real(real'($urandom_range(0, 2000)) / 1000.0 - 1.0));
    end
    dj = (hx / 2.0) * (hy / 2.0) * (hz / 2.0);
    for (int ez = 0; ez < EZ; ez++) for (int ey = 0; ey < EY; ey++) for (int ex = 0; ex < EX; ex++)
      for (int k = 0; k < NP; k++) for (int j = 0; j < NP; j++) for (int i = 0; i < NP; i++) begin
        int e = ex + EX * (ey + EY * ez);
        int l = e * NP3 + i + NP * j + NP * NP * k;
        int gx = ex * N + i, gy = ey * N + j, gz = ez * N + k;
        real wv = wq[i] * wq[j] * wq[k] * dj;
        gid[l] = gx + GX * (gy + GY * gz);
        msk[l] = (gx == 0 || gx == GX - 1 || gy == 0 || gy == GY - 1 || gz == 0 || gz == GZ - 1);
        mult[gid[l]]++;
        G[l][0] = to_real(from_real(wv / ((hx / 2.0) ** 2)));
        G[l][1] = 0.0; G[l][2] = 0.0; G[l][4] = 0.0;
        G[l][3] = to_real(from_real(wv / ((hy / 2.0) ** 2)));
        G[l][5] = to_real(from_real(wv / ((hz / 2.0) ** 2)));
      end
    for (int l = 0; l < NL; l++) begin
      c[l] = to_real(from_real(1.0 / mult[gid[l]]));
      b[l] = msk[l] ? 0.0 : bg[gid[l]];
    end
  endtask

  // ------------------------------------------------- binary64 reference
  real rx [NL], rr [NL], rp [NL], rw [NL];
  real rrho;
  int  ref_iters;

  function automatic real gm(int l, int a, int bb);
    int idx [3][3] = '{'{0, 1, 2}, '{1, 3, 4}, '{2, 4, 5}};
    return G[l][idx[a][bb]];
  endfunction

  task automatic ref_ax();
    real ur [NP3], us [NP3], ut [NP3], wr [NP3], ws [NP3], wt [NP3], acc [NG];
    for (int e = 0; e < NE; e++) begin
      int o = e * NP3;
      for (int k = 0; k < NP; k++) for (int j = 0; j < NP; j++) for (int i = 0; i < NP; i++) begin
        int p = i + NP*j + NP*NP*k;
        ur[p] = 0.0; us[p] = 0.0; ut[p] = 0.0;
        for (int l = 0; l < NP; l++) begin
          ur[p] += D[i][l] * rp[o + l + NP*j + NP*NP*k];
          us[p] += D[j][l] * rp[o + i + NP*l + NP*NP*k];
          ut[p] += D[k][l] * rp[o + i + NP*j + NP*NP*l];
        end
        wr[p] = gm(o+p,0,0)*ur[p] + gm(o+p,0,1)*us[p] + gm(o+p,0,2)*ut[p];
        ws[p] = gm(o+p,1,0)*ur[p] + gm(o+p,1,1)*us[p] + gm(o+p,1,2)*ut[p];
        wt[p] = gm(o+p,2,0)*ur[p] + gm(o+p,2,1)*us[p] + gm(o+p,2,2)*ut[p];
      end
      for (int k = 0; k < NP; k++) for (int j = 0; j < NP; j++) for (int i = 0; i < NP; i++) begin
        int p = i + NP*j + NP*NP*k;
        rw[o + p] = 0.0;
        for (int l = 0; l < NP; l++)
          rw[o + p] += D[l][i] * wr[l + NP*j + NP*NP*k] + D[l][j] * ws[i + NP*l + NP*NP*k]
                     + D[l][k] * wt[i + NP*j + NP*NP*l];
      end
    end
    for (int g = 0; g < NG; g++) acc[g] = 0.0;
    for (int l = 0; l < NL; l++) acc[gid[l]] += rw[l];
    for (int l = 0; l < NL; l++) rw[l] = msk[l] ? 0.0 : acc[gid[l]];
  endtask

  // CG of the algorithm, x0 = 0; stops after maxit or when rho < rtol
  task automatic ref_cg(int maxit, real rtol);
    real beta = 0.0, pw, alpha, rn;
    for (int l = 0; l < NL; l++) begin rx[l] = 0.0; rr[l] = b[l]; rp[l] = 0.0; end
    rrho = 0.0;
    for (int l = 0; l < NL; l++) rrho += rr[l] * rr[l] * c[l];
    ref_iters = 0;
    while (ref_iters < maxit && !(rrho < rtol)) begin
      for (int l = 0; l < NL; l++) rp[l] = rr[l] + beta * rp[l];
      ref_ax();
      pw = 0.0;
      for (int l = 0; l < NL; l++) pw += rp[l] * rw[l] * c[l];
      alpha = rrho / pw;
      rn = 0.0;
      for (int l = 0; l < NL; l++) begin
        rx[l] += alpha * rp[l];
        rr[l] -= alpha * rw[l];
        rn += rr[l] * rr[l] * c[l];
      end
      beta = rn / rrho;
      rrho = rn;
      ref_iters++;
    end
  endtask

  // ------------------------------------------------------- host access
  task automatic hwrite(sel_e s, int a, fp_t d);
    @(negedge clk);
    h_we = 1'b1; h_sel = s; h_addr = LAW'(a); h_wdata = d;
    @(negedge clk);
    h_we = 1'b0;
  endtask

  task automatic load_problem();
    for (int i = 0; i < NP; i++) for (int l = 0; l < NP; l++) hwrite(SEL_D, i * NP + l, from_real(D[i][l]));
    for (int l = 0; l < NL; l++) begin
      hwrite(SEL_X, l, '0);
      hwrite(SEL_R, l, from_real(b[l]));
      hwrite(SEL_P, l, '0);
      hwrite(SEL_C, l, from_real(c[l]));
      hwrite(SEL_G11, l, from_real(G[l][0])); hwrite(SEL_G12, l, from_real(G[l][1]));
      hwrite(SEL_G13, l, from_real(G[l][2])); hwrite(SEL_G22, l, from_real(G[l][3]));
      hwrite(SEL_G23, l, from_real(G[l][4])); hwrite(SEL_G33, l, from_real(G[l][5]));
      hwrite(SEL_GID, l, FP_W'(gid[l]));
      hwrite(SEL_MASK, l, FP_W'(msk[l]));
    end
  endtask

  task automatic run(int maxit, fp_t t, output longint cycles);
    longint c0;
    @(negedge clk);
    num_elems = NE; num_global = NG; max_iter = 16'(maxit); tol = t; start = 1'b1;
    c0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    cycles = cyc - c0;
  endtask

  task automatic compare_x(string what, real rel);
    real mx = 0.0, err = 0.0, v;
    for (int l = 0; l < NL; l++) if (fabs(rx[l]) > mx) mx = fabs(rx[l]);
    for (int l = 0; l < NL; l++) begin
      @(negedge clk);
      h_rsel = SEL_X; h_raddr = LAW'(l);
      #1 v = to_real(h_rdata);
      checks++;
      if (fabs(v - rx[l]) > rel * mx) begin
        failures++;
        if (failures < 10) $display("FAIL %s x[%0d] got %g exp %g", what, l, v, rx[l]);
      end
      if (fabs(v - rx[l]) > err) err = fabs(v - rx[l]);
    end
    $display("%s: max |x - x_ref| = %g (max |x_ref| = %g)", what, err, mx);
  endtask

  // ---------------------------------------------------- mechanism counts
  longint cyc = 0;
  longint n_stall = 0, n_pfused = 0, n_summed = 0, n_masked = 0, n_limit = 0, n_conv = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.ax_in_valid && !dut.ax_in_ready) n_stall++;
      if (dut.ax_in_valid && dut.ax_in_ready) n_pfused++;
      if (dut.gs_w_we && dut.mask_rd) n_masked++;
      if (dut.gs_w_we && !dut.mask_rd && dut.gs_w_wd != dut.w_rd) n_summed++;
      if (done && converged) n_conv++;
      if (done && !converged) n_limit++;
    end
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint cycles, per_iter;
    real rho0, rtol;
    gll();
    mesh();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    load_problem();

    // run 1: iteration limit
    run(ITERS, from_real(1.0e-30), cycles);
    ref_cg(ITERS, 1.0e-30);
    checks++;
    if (converged || iter_count != 16'(ITERS)) begin
      failures++; $display("FAIL run1 converged=%0b iters=%0d", converged, iter_count);
    end
    checks++;
    if (!close(to_real(rho), rrho, 1.0e-2, 1.0e-20)) begin
      failures++; $display("FAIL run1 rho %g exp %g", to_real(rho), rrho);
    end
    compare_x("run1", 1.0e-3);
    per_iter = longint'(NE) * NP3 * (2 * NP + 5) + NG + 2 * NL + 2 * (NL + 1);
    $display("run1: %0d cycles for %0d iterations, model %0d per iteration", cycles, ITERS, per_iter);
    checks++;
    if (cycles < ITERS * per_iter || cycles > ITERS * (per_iter + 20) + NL + 20) begin
      failures++; $display("FAIL run1 cycle count %0d", cycles);
    end

    // run 2: to convergence, from x0 = 0 again
    for (int l = 0; l < NL; l++) begin
      hwrite(SEL_X, l, '0); hwrite(SEL_R, l, from_real(b[l])); hwrite(SEL_P, l, '0);
    end
    rho0 = 0.0;
    for (int l = 0; l < NL; l++) rho0 += b[l] * b[l] * c[l];
    rtol = to_real(from_real(rho0 * 1.0e-7));
    run(400, from_real(rtol), cycles);
    ref_cg(400, rtol);
    $display("run2: converged=%0b after %0d iterations (binary64: %0d), %0d cycles",
             converged, iter_count, ref_iters, cycles);
    checks++;
    if (!converged) begin failures++; $display("FAIL run2 did not converge"); end
    checks++;
    if (!(to_real(rho) < rtol)) begin failures++; $display("FAIL run2 rho %g not below %g", to_real(rho), rtol); end
    compare_x("run2", 2.0e-3);

    $display("mechanisms: stalls=%0d fused_p=%0d summed=%0d masked=%0d limit_stops=%0d conv_stops=%0d",
             n_stall, n_pfused, n_summed, n_masked, n_limit, n_conv);
    checks++; if (n_stall  == 0) begin failures++; $display("FAIL no element-stream stall"); end
    checks++; if (n_pfused == 0) begin failures++; $display("FAIL no fused p update"); end
    checks++; if (n_summed == 0) begin failures++; $display("FAIL no gather-scatter summation"); end
    checks++; if (n_masked == 0) begin failures++; $display("FAIL no masked point"); end
    checks++; if (n_limit  == 0) begin failures++; $display("FAIL no iteration-limit stop"); end
    checks++; if (n_conv   == 0) begin failures++; $display("FAIL no convergence stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
