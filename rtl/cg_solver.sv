// cg_solver: unpreconditioned conjugate-gradient solver for the Poisson
// equation discretised with the spectral element method (top level).
//
// The solver keeps every vector in the local, element-by-element layout and
// runs, per iteration i, the following schedule of the CG algorithm:
//   FEED   p = r + beta*p, fused with the element operator: each new p
//          value is written back and streamed, with the geometric factors
//          of its point, into ax_local; the operator output w = A_L p is
//          written to the w array as it leaves the unit.
//   GS     gather-scatter w = Q Q^T w, then zero the boundary points.
//   PW     pw = <p, w, c>;  alpha = rho / pw.
//   UPD    x += alpha p, r -= alpha w, rho_new = <r, r, c>, in one pass.
//   BETA   beta = rho_new / rho, rho = rho_new; stop when rho < tol
//          (converged) or when max_iter iterations have run.
// Before the first iteration rho = <r, r, c> is formed and beta = 0, so the
// host loads x = x0, r = b - A x0 and p = 0.  The three passes over the
// vectors are separated by the two global reductions of CG, which act as
// synchronisation points: each one must finish before the next pass starts.
// The algorithm, the loop fusions (lines 5-6 and 9-11), the weights c and
// the polynomial order N = 7 follow the source.  Keeping all arrays in
// on-chip memories (vec_ram, MAX_ELEMS elements, default 32768 = the largest
// mesh evaluated) is this design's choice in place of the four external
// DDR4 banks; so is the host port.
//
// Geometric factors: with REMAT = 0 (default, the FP32-CG design of the
// source) the six factors of every local point are loaded by the host and
// stored (SEL_G11..SEL_G33).  With REMAT = 1 (the FP32-Remat variant) the
// host loads per element the inverse Jacobian (SEL_JINV + 3*row + col,
// address = element) and its determinant (SEL_DETJ), plus the NP 1-D
// quadrature weights (SEL_WQ, address = GLL index); geom_remat forms the
// factors of each point as it is fed, and the six per-point arrays are not
// built.  This element-constant form is exact for affine (straight-sided)
// elements only, a restriction of this design.  Those inputs cannot be read
// back through h_rdata.
//
// Host interface (only while busy is low): h_we/h_sel/h_addr/h_wdata write
// one word of the array h_sel (sel_e in sem_pkg; for SEL_GID the low bits
// hold the global point number, for SEL_MASK bit 0 is the boundary flag,
// for SEL_D h_addr = i*NP+l).  h_rsel/h_raddr/h_rdata read any array
// except D asynchronously.  num_elems, num_global, max_iter and tol are
// sampled at the start pulse.  done pulses when the run ends; iter_count,
// rho and converged then hold the result.
//
// Timing per iteration with E elements and n = E*NP^3 local points:
// E*NP^3*(2*NP+5) (operator) + num_global + 2n (gather-scatter) + 2(n+1)
// (the two vector passes) + a few control cycles.
//
// Lint notes: the host write strobes of the geometry variant that is not
// built (rm_we/wq_we, or g_we/g_ra) are left unused; rst_n is both the
// asynchronous reset of the flops and the disable term of the concurrent
// assertions, which lint reports as a net used both ways.
module cg_solver
  import sem_pkg::*;
#(
  parameter int N         = 7,
  parameter int MAX_ELEMS = 32768,
  parameter bit REMAT     = 1'b0,
  parameter int NP        = N + 1,
  parameter int NP3       = NP * NP * NP,
  parameter int MAX_LOCAL = MAX_ELEMS * NP3,
  parameter int LAW       = $clog2(MAX_LOCAL),
  parameter int EAW       = $clog2(MAX_ELEMS + 1),
  parameter int XAW       = $clog2(MAX_ELEMS) > 0 ? $clog2(MAX_ELEMS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host access to the arrays
  input  logic                 h_we,
  input  sel_e                 h_sel,
  input  logic [LAW-1:0]       h_addr,
  input  fp_t                  h_wdata,
  input  sel_e                 h_rsel,
  input  logic [LAW-1:0]       h_raddr,
  output fp_t                  h_rdata,
  // run control
  input  logic                 start,
  input  logic [EAW-1:0]       num_elems,
  input  logic [LAW:0]         num_global,
  input  logic [15:0]          max_iter,
  input  fp_t                  tol,
  output logic                 busy,
  output logic                 done,
  output logic [15:0]          iter_count,
  output fp_t                  rho,
  output logic                 converged
);
  typedef enum logic [3:0] {
    C_IDLE, C_INIT, C_INIT_W, C_FEED, C_GS, C_GS_W, C_PW, C_PW_W,
    C_UPD, C_UPD_W, C_BETA
  } cstate_e;
  cstate_e state;

  logic [LAW:0]   n;             // local points of this run
  logic [LAW:0]   ng;            // global points of this run
  logic [15:0]    iter_max;
  fp_t            tol_q;
  fp_t            alpha, beta;
  logic [LAW:0]   fi, ci;        // feed / collect counters

  // ---------------------------------------------------------------- arrays
  logic [LAW-1:0] x_ra, r_ra, p_ra, w_ra, c_ra, g_ra, m_ra;
  logic [LAW-1:0] x_wa, r_wa, p_wa, w_wa;
  logic           x_we, r_we, p_we, w_we, c_we, gid_we, mask_we;
  logic [5:0]     g_we;
  fp_t            x_wd, r_wd, p_wd, w_wd;
  fp_t            x_rd, r_rd, p_rd, w_rd, c_rd;
  fp_t            g_rd [6];
  logic [LAW-1:0] gid_rd;
  logic           mask_rd;
  geom_t          g_pt;

  vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_x (.clk, .we(x_we), .waddr(x_wa), .wdata(x_wd), .raddr(x_ra), .rdata(x_rd));
  vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_r (.clk, .we(r_we), .waddr(r_wa), .wdata(r_wd), .raddr(r_ra), .rdata(r_rd));
  vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_p (.clk, .we(p_we), .waddr(p_wa), .wdata(p_wd), .raddr(p_ra), .rdata(p_rd));
  vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_w (.clk, .we(w_we), .waddr(w_wa), .wdata(w_wd), .raddr(w_ra), .rdata(w_rd));
  vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_c (.clk, .we(c_we), .waddr(h_addr), .wdata(h_wdata), .raddr(c_ra), .rdata(c_rd));
  vec_ram #(.WIDTH(LAW), .DEPTH(MAX_LOCAL)) u_gid (.clk, .we(gid_we), .waddr(h_addr), .wdata(h_wdata[LAW-1:0]), .raddr(m_ra), .rdata(gid_rd));
  vec_ram #(.WIDTH(1), .DEPTH(MAX_LOCAL)) u_mask (.clk, .we(mask_we), .waddr(h_addr), .wdata(h_wdata[0]), .raddr(m_ra), .rdata(mask_rd));

  // geometric factors of the point being fed: loaded per point, or
  // recomputed from per-element data
  logic [9:0]     rm_we;         // 9 inverse-Jacobian entries, detJ
  logic           wq_we;

  if (REMAT) begin : g_remat
    localparam int QW = $clog2(NP);
    logic [XAW-1:0] fe;          // element of the point being fed
    logic [LAW:0]   fpt;         // its index inside the element
    logic [QW-1:0]  fpi, fpj, fpk;
    always_comb begin
      fe  = XAW'(fi / (LAW+1)'(NP3));
      fpt = fi % (LAW+1)'(NP3);
      fpi = QW'(fpt % (LAW+1)'(NP));
      fpj = QW'((fpt / (LAW+1)'(NP)) % (LAW+1)'(NP));
      fpk = QW'(fpt / (LAW+1)'(NP * NP));
    end
    fp_t jinv [3][3];
    fp_t detj;
    fp_t wq [NP];
    for (genvar a = 0; a < 3; a++) begin : g_row
      for (genvar b = 0; b < 3; b++) begin : g_col
        vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_ELEMS)) u_j (.clk, .we(rm_we[3*a+b]), .waddr(h_addr[XAW-1:0]), .wdata(h_wdata), .raddr(fe), .rdata(jinv[a][b]));
      end
    end
    vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_ELEMS)) u_detj (.clk, .we(rm_we[9]), .waddr(h_addr[XAW-1:0]), .wdata(h_wdata), .raddr(fe), .rdata(detj));
    always_ff @(posedge clk) begin
      if (wq_we) wq[h_addr[$clog2(NP)-1:0]] <= h_wdata;
    end
    geom_remat u_remat (.jinv(jinv), .detj(detj), .wi(wq[fpi]), .wj(wq[fpj]), .wk(wq[fpk]), .g(g_pt));
    for (genvar g = 0; g < 6; g++) begin : g_nogeom
      assign g_rd[g] = '0;
    end
  end else begin : g_stored
    for (genvar g = 0; g < 6; g++) begin : g_geom
      vec_ram #(.WIDTH(FP_W), .DEPTH(MAX_LOCAL)) u_g (.clk, .we(g_we[g]), .waddr(h_addr), .wdata(h_wdata), .raddr(g_ra), .rdata(g_rd[g]));
    end
    assign g_pt = '{g11: g_rd[0], g12: g_rd[1], g13: g_rd[2], g22: g_rd[3], g23: g_rd[4], g33: g_rd[5]};
  end

  // ---------------------------------------------------------- sub-units
  logic           ax_in_valid, ax_in_ready, ax_out_valid, ax_busy;
  fp_t            ax_out_w, p_new, bp;
  logic           d_we;

  fp_mul u_bp   (.a(beta), .b(p_rd), .y(bp));
  fp_add u_pnew (.a(r_rd), .b(bp),   .y(p_new));

  ax_local #(.N(N)) u_ax (
    .clk, .rst_n,
    .d_we(d_we), .d_addr(h_addr[$clog2(NP*NP)-1:0]), .d_wdata(h_wdata),
    .in_valid(ax_in_valid), .in_ready(ax_in_ready), .in_u(p_new), .in_g(g_pt),
    .out_valid(ax_out_valid), .out_ready(1'b1), .out_w(ax_out_w), .busy(ax_busy)
  );

  logic           gs_start, gs_busy, gs_done, gs_w_we;
  logic [LAW-1:0] gs_idx;
  fp_t            gs_w_wd;

  gather_scatter #(.MAX_LOCAL(MAX_LOCAL), .MAX_GLOBAL(MAX_LOCAL)) u_gs (
    .clk, .rst_n, .start(gs_start), .num_local(n), .num_global(ng),
    .busy(gs_busy), .done(gs_done), .idx(gs_idx),
    .w_rdata(w_rd), .gid_rdata(gid_rd), .mask_rdata(mask_rd),
    .w_we(gs_w_we), .w_wdata(gs_w_wd)
  );

  logic           vo_start, vo_busy, vo_done, vo_x_we, vo_r_we;
  vop_e           vo_op;
  logic [LAW-1:0] vo_idx;
  fp_t            vo_x_wd, vo_r_wd, vo_acc;

  cg_vecops #(.MAX_LOCAL(MAX_LOCAL)) u_vo (
    .clk, .rst_n, .start(vo_start), .op(vo_op), .n(n), .alpha(alpha),
    .busy(vo_busy), .done(vo_done), .idx(vo_idx),
    .x_i(x_rd), .r_i(r_rd), .p_i(p_rd), .w_i(w_rd), .c_i(c_rd),
    .x_we(vo_x_we), .x_wdata(vo_x_wd), .r_we(vo_r_we), .r_wdata(vo_r_wd), .acc(vo_acc)
  );

  // one divider serves alpha = rho/pw and beta = rho_new/rho
  fp_t div_a, div_b, div_y;
  fp_div u_div (.a(div_a), .b(div_b), .y(div_y));
  always_comb begin
    if (state == C_PW_W) begin div_a = rho;    div_b = vo_acc; end
    else                 begin div_a = vo_acc; div_b = rho;    end
  end

  // ------------------------------------------------------- array routing
  logic idle;
  assign idle = (state == C_IDLE);

  assign ax_in_valid = (state == C_FEED) && (fi < n);

  always_comb begin
    // reads
    x_ra = vo_idx; c_ra = vo_idx;
    r_ra = (state == C_FEED) ? fi[LAW-1:0] : vo_idx;
    p_ra = r_ra;
    g_ra = fi[LAW-1:0];
    w_ra = (state == C_GS_W) ? gs_idx : vo_idx;
    m_ra = gs_idx;
    if (idle) begin
      x_ra = h_raddr; r_ra = h_raddr; p_ra = h_raddr; w_ra = h_raddr;
      c_ra = h_raddr; g_ra = h_raddr; m_ra = h_raddr;
    end
    // writes
    x_we = vo_x_we;  x_wa = vo_idx;       x_wd = vo_x_wd;
    r_we = vo_r_we;  r_wa = vo_idx;       r_wd = vo_r_wd;
    p_we = ax_in_valid && ax_in_ready;    p_wa = fi[LAW-1:0]; p_wd = p_new;
    if (state == C_GS_W) begin
      w_we = gs_w_we; w_wa = gs_idx; w_wd = gs_w_wd;
    end else begin
      w_we = (state == C_FEED) && ax_out_valid; w_wa = ci[LAW-1:0]; w_wd = ax_out_w;
    end
    c_we = 1'b0; g_we = '0; gid_we = 1'b0; mask_we = 1'b0; d_we = 1'b0;
    rm_we = '0; wq_we = 1'b0;
    if (idle && h_we) begin
      unique case (h_sel)
        SEL_X:    begin x_we = 1'b1; x_wa = h_addr; x_wd = h_wdata; end
        SEL_R:    begin r_we = 1'b1; r_wa = h_addr; r_wd = h_wdata; end
        SEL_P:    begin p_we = 1'b1; p_wa = h_addr; p_wd = h_wdata; end
        SEL_W:    begin w_we = 1'b1; w_wa = h_addr; w_wd = h_wdata; end
        SEL_C:    c_we = 1'b1;
        SEL_G11:  g_we[0] = 1'b1;
        SEL_G12:  g_we[1] = 1'b1;
        SEL_G13:  g_we[2] = 1'b1;
        SEL_G22:  g_we[3] = 1'b1;
        SEL_G23:  g_we[4] = 1'b1;
        SEL_G33:  g_we[5] = 1'b1;
        SEL_GID:  gid_we = 1'b1;
        SEL_MASK: mask_we = 1'b1;
        SEL_D:    d_we = 1'b1;
        SEL_DETJ: rm_we[9] = 1'b1;
        SEL_WQ:   wq_we = 1'b1;
        default:  if (h_sel >= SEL_JINV && h_sel < SEL_DETJ) rm_we[4'(h_sel - SEL_JINV)] = 1'b1;
      endcase
    end
    unique case (h_rsel)
      SEL_X:    h_rdata = x_rd;
      SEL_R:    h_rdata = r_rd;
      SEL_P:    h_rdata = p_rd;
      SEL_W:    h_rdata = w_rd;
      SEL_C:    h_rdata = c_rd;
      SEL_G11:  h_rdata = g_rd[0];
      SEL_G12:  h_rdata = g_rd[1];
      SEL_G13:  h_rdata = g_rd[2];
      SEL_G22:  h_rdata = g_rd[3];
      SEL_G23:  h_rdata = g_rd[4];
      SEL_G33:  h_rdata = g_rd[5];
      SEL_GID:  h_rdata = FP_W'(gid_rd);
      SEL_MASK: h_rdata = FP_W'(mask_rd);
      default:  h_rdata = '0;
    endcase
  end

  // positive floating-point values order like their bit patterns
  logic below_tol;
  assign below_tol = (div_a < tol_q);     // div_a is rho_new in C_BETA, rho in C_INIT_W

  assign busy = !idle;

  // ------------------------------------------------------------ control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      n <= '0; ng <= '0; iter_max <= '0; tol_q <= '0;
      alpha <= '0; beta <= '0; rho <= '0;
      fi <= '0; ci <= '0;
      iter_count <= '0; converged <= 1'b0; done <= 1'b0;
      gs_start <= 1'b0; vo_start <= 1'b0; vo_op <= VOP_DOT_RR;
    end else begin
      done     <= 1'b0;
      gs_start <= 1'b0;
      vo_start <= 1'b0;
      unique case (state)
        C_IDLE: if (start) begin
          n          <= (LAW+1)'(num_elems) * (LAW+1)'(NP3);
          ng         <= num_global;
          iter_max   <= max_iter;
          tol_q      <= tol;
          iter_count <= '0;
          converged  <= 1'b0;
          beta       <= '0;
          state      <= C_INIT;
        end
        C_INIT: begin
          vo_op <= VOP_DOT_RR; vo_start <= 1'b1; state <= C_INIT_W;
        end
        C_INIT_W: if (vo_done) begin
          rho <= vo_acc;
          if (vo_acc < tol_q) begin
            converged <= 1'b1; done <= 1'b1; state <= C_IDLE;
          end else if (iter_max == '0) begin
            done <= 1'b1; state <= C_IDLE;
          end else begin
            fi <= '0; ci <= '0; state <= C_FEED;
          end
        end
        C_FEED: begin
          if (ax_in_valid && ax_in_ready) fi <= fi + 1'b1;
          if (ax_out_valid) begin
            ci <= ci + 1'b1;
            if (ci + 1'b1 == n) state <= C_GS;
          end
        end
        C_GS: begin
          gs_start <= 1'b1; state <= C_GS_W;
        end
        C_GS_W: if (gs_done) state <= C_PW;
        C_PW: begin
          vo_op <= VOP_DOT_PW; vo_start <= 1'b1; state <= C_PW_W;
        end
        C_PW_W: if (vo_done) begin
          alpha <= div_y;
          state <= C_UPD;
        end
        C_UPD: begin
          vo_op <= VOP_UPDATE; vo_start <= 1'b1; state <= C_UPD_W;
        end
        C_UPD_W: if (vo_done) state <= C_BETA;
        C_BETA: begin
          beta       <= div_y;
          rho        <= vo_acc;
          iter_count <= iter_count + 1'b1;
          if (below_tol) begin
            converged <= 1'b1; done <= 1'b1; state <= C_IDLE;
          end else if (iter_count + 1'b1 >= iter_max) begin
            done <= 1'b1; state <= C_IDLE;
          end else begin
            fi <= '0; ci <= '0; state <= C_FEED;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // the three sub-units never work at the same time: each pass waits for
  // the reduction before it
  a_one_unit: assert property (@(posedge clk) disable iff (!rst_n)
    !(gs_busy && vo_busy) && !(ax_busy && (gs_busy || vo_busy)));
  a_feed_order: assert property (@(posedge clk) disable iff (!rst_n)
    (state == C_FEED && ax_out_valid) |-> (ci < fi));
endmodule
