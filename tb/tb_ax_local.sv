// tb_ax_local: self-checking test of the local element operator.
//
// A random derivative matrix, random field values and random symmetric
// geometric factors are generated for three elements.  The expected w is
// computed here in binary64 straight from the defining sums and compared
// point by point (tolerance scaled to the element's largest value).  The
// first element runs with no back-pressure and its cycle count is checked
// against NP^3*(2*NP+5); the others are fed with gaps on the input stream
// and random stalls on the output stream.
module tb_ax_local;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  localparam int N   = 7;
  localparam int NP  = N + 1;
  localparam int NP3 = NP * NP * NP;
  localparam int NEL = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic d_we = 1'b0;
  logic [$clog2(NP*NP)-1:0] d_addr = '0;
  fp_t d_wdata = '0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b1, busy;
  fp_t in_u = '0, out_w;
  geom_t in_g = '0;

  ax_local #(.N(N)) dut (.*);

  real D [NP][NP];
  real U [NEL][NP3];
  real G [NEL][NP3][6];
  real W [NEL][NP3];
  int checks = 0, failures = 0;
  int stalls = 0;
  longint cyc = 0, t_first_in = -1, t_last_out = -1;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real q(real r);  // round through the target format
    return to_real(from_real(r));
  endfunction

  function automatic real gm(int e, int p, int a, int b);
    int idx [3][3] = '{'{0, 1, 2}, '{1, 3, 4}, '{2, 4, 5}};
    return G[e][p][idx[a][b]];
  endfunction

  task automatic reference();
    real ur [NP3], us [NP3], ut [NP3], wr [NP3], ws [NP3], wt [NP3];
    for (int e = 0; e < NEL; e++) begin
      for (int k = 0; k < NP; k++) for (int j = 0; j < NP; j++) for (int i = 0; i < NP; i++) begin
        int p = i + NP*j + NP*NP*k;
        ur[p] = 0.0; us[p] = 0.0; ut[p] = 0.0;
        for (int l = 0; l < NP; l++) begin
          ur[p] += D[i][l] * U[e][l + NP*j + NP*NP*k];
          us[p] += D[j][l] * U[e][i + NP*l + NP*NP*k];
          ut[p] += D[k][l] * U[e][i + NP*j + NP*NP*l];
        end
        wr[p] = gm(e,p,0,0)*ur[p] + gm(e,p,0,1)*us[p] + gm(e,p,0,2)*ut[p];
        ws[p] = gm(e,p,1,0)*ur[p] + gm(e,p,1,1)*us[p] + gm(e,p,1,2)*ut[p];
        wt[p] = gm(e,p,2,0)*ur[p] + gm(e,p,2,1)*us[p] + gm(e,p,2,2)*ut[p];
      end
      for (int k = 0; k < NP; k++) for (int j = 0; j < NP; j++) for (int i = 0; i < NP; i++) begin
        int p = i + NP*j + NP*NP*k;
        W[e][p] = 0.0;
        for (int l = 0; l < NP; l++)
          W[e][p] += D[l][i] * wr[l + NP*j + NP*NP*k] + D[l][j] * ws[i + NP*l + NP*NP*k]
                   + D[l][k] * wt[i + NP*j + NP*NP*l];
      end
    end
  endtask

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 1000000)) / 1000000.0;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor with random stalls after the first element
  initial begin
    int e = 0, p = 0;
    real mx;
    @(posedge rst_n);
    while (e < NEL) begin
      @(negedge clk);
      out_ready = (e == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (out_valid && !out_ready) stalls++;
      if (out_valid && out_ready) begin
        mx = 0.0;
        for (int t = 0; t < NP3; t++) if (fabs(W[e][t]) > mx) mx = fabs(W[e][t]);
        checks++;
        if (!close(to_real(out_w), W[e][p], 0.0, 2.0e-5 * mx)) begin
          failures++;
          if (failures < 10) $display("FAIL e%0d p%0d got %g exp %g", e, p, to_real(out_w), W[e][p]);
        end
        if (e == 0 && p == NP3 - 1) t_last_out = cyc;
        p++;
        if (p == NP3) begin p = 0; e++; end
      end
    end
    checks++;
    if (t_last_out - t_first_in + 1 != longint'(NP3 * (2 * NP + 5))) begin
      failures++;
      $display("FAIL latency %0d expected %0d", t_last_out - t_first_in + 1, NP3 * (2 * NP + 5));
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no output stall exercised"); end
    checks++;
    @(posedge clk);
    if (busy) begin failures++; $display("FAIL busy after last element"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NP; i++) for (int l = 0; l < NP; l++) D[i][l] = q(urand(-2.0, 2.0));
    for (int e = 0; e < NEL; e++) for (int p = 0; p < NP3; p++) begin
      U[e][p] = q(urand(-1.0, 1.0));
      G[e][p][0] = q(urand(0.5, 2.0)); G[e][p][3] = q(urand(0.5, 2.0)); G[e][p][5] = q(urand(0.5, 2.0));
      G[e][p][1] = q(urand(-0.3, 0.3)); G[e][p][2] = q(urand(-0.3, 0.3)); G[e][p][4] = q(urand(-0.3, 0.3));
    end
    reference();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NP; i++) for (int l = 0; l < NP; l++) begin
      @(negedge clk);
      d_we = 1'b1; d_addr = ($clog2(NP*NP))'(i * NP + l); d_wdata = from_real(D[i][l]);
    end
    @(negedge clk) d_we = 1'b0;
    for (int e = 0; e < NEL; e++) for (int p = 0; p < NP3; p++) begin
      in_valid = (e == 0) ? 1'b1 : 1'b0;
      while (e != 0 && $urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1'b1;
      in_u = from_real(U[e][p]);
      in_g = '{g11: from_real(G[e][p][0]), g12: from_real(G[e][p][1]), g13: from_real(G[e][p][2]),
               g22: from_real(G[e][p][3]), g23: from_real(G[e][p][4]), g33: from_real(G[e][p][5])};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (e == 0 && p == 0) t_first_in = cyc;
      @(negedge clk);
      in_valid = 1'b0;
    end
  end
endmodule
