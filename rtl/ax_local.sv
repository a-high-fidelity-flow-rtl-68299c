// ax_local: matrix-free local spectral-element operator, w = D^T G D u,
// evaluated one hexahedral element at a time.
//
// An element holds NP^3 = (N+1)^3 Gauss-Lobatto-Legendre points, indexed
// i + NP*j + NP*NP*k with i fastest.  For every point the unit forms the
// three reference-space derivatives
//     ur = sum_l D[i][l] u(l,j,k),  us = sum_l D[j][l] u(i,l,k),
//     ut = sum_l D[k][l] u(i,j,l),
// multiplies them by the symmetric geometric tensor G of that point
//     (wr,ws,wt) = G (ur,us,ut),
// and applies the transposed derivative
//     w(i,j,k) = sum_l D[l][i] wr(l,j,k) + D[l][j] ws(i,l,k) + D[l][k] wt(i,j,l).
// This is 12(N+1)+15 floating-point operations per point, the count the
// source gives for this kernel.  The operator, N = 7 and the streaming
// element-by-element structure follow the source; the micro-architecture
// (three multiply-add lanes, one point per NP cycles in each derivative
// phase) is this design's own choice, the source builds the kernel with an
// HLS compiler and does not describe its pipeline.
//
// Phases and timing for one element, with no back-pressure:
//   LOAD  NP^3 cycles   accept (u, G) per point on the input stream
//   GRAD  NP^3*NP       derivatives, one term per lane per cycle
//   GEOM  NP^3*3        G times the gradient
//   DIV   NP^3*NP       transposed derivative and the 3-term sum
//   OUT   NP^3          w per point on the output stream
// i.e. NP^3*(2*NP+5) cycles per element (10752 for N = 7).
//
// Interfaces: the derivative matrix D (D[i*NP+l] = l_l'(xi_i)) is written
// through d_we/d_addr/d_wdata while the unit is idle.  Both streams use a
// valid/ready handshake: a beat moves on a rising clock edge where valid
// and ready are both high, and valid, once raised, holds with its data
// until accepted.
//
// Lint note: the point addresses ix_l/ix_j/ix_k are integers of which only
// the low bits (log2 of NP^3) index the element buffers.
module ax_local
  import sem_pkg::*;
#(
  parameter int N  = 7,
  parameter int NP = N + 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // derivative matrix load
  input  logic                           d_we,
  input  logic [$clog2(NP*NP)-1:0]       d_addr,
  input  fp_t                            d_wdata,
  // element input stream
  input  logic                           in_valid,
  output logic                           in_ready,
  input  fp_t                            in_u,
  input  geom_t                          in_g,
  // element output stream
  output logic                           out_valid,
  input  logic                           out_ready,
  output fp_t                            out_w,
  output logic                           busy
);
  localparam int NP2 = NP * NP;
  localparam int NP3 = NP * NP * NP;
  localparam int PW  = $clog2(NP3);
  localparam int LW  = $clog2(NP) > 1 ? $clog2(NP) : 2;

  typedef enum logic [2:0] {S_LOAD, S_GRAD, S_GEOM, S_DIV, S_OUT} state_e;
  state_e state;

  fp_t   dm [NP2];
  fp_t   ub [NP3];
  geom_t gb [NP3];
  fp_t   rb [NP3];
  fp_t   sb [NP3];
  fp_t   tb [NP3];
  fp_t   wb [NP3];

  logic [PW-1:0] pt;             // current point
  logic [LW-1:0] ci, cj, ck;     // its (i,j,k)
  logic [LW-1:0] l;              // inner index / term counter
  fp_t           acc [3];

  // three multiply-add lanes
  fp_t ma [3], mb [3], mp [3], ain [3], mo [3];
  fp_t sum01, sum012;

  for (genvar g = 0; g < 3; g++) begin : g_lane
    fp_mul u_mul (.a(ma[g]), .b(mb[g]), .y(mp[g]));
    fp_add u_add (.a(mp[g]), .b(ain[g]), .y(mo[g]));
  end
  fp_add u_sum0 (.a(mo[0]), .b(mo[1]), .y(sum01));
  fp_add u_sum1 (.a(sum01), .b(mo[2]), .y(sum012));

  int ii, jj, kk, ll;
  int ix_l, ix_j, ix_k;   // addresses with l substituted for i, j or k
  fp_t gsel [3][3];       // G as a full symmetric matrix

  always_comb begin
    ii = int'(ci); jj = int'(cj); kk = int'(ck); ll = int'(l);
    ix_l = ll + NP * jj + NP2 * kk;
    ix_j = ii + NP * ll + NP2 * kk;
    ix_k = ii + NP * jj + NP2 * ll;
    gsel[0][0] = gb[pt].g11; gsel[0][1] = gb[pt].g12; gsel[0][2] = gb[pt].g13;
    gsel[1][0] = gb[pt].g12; gsel[1][1] = gb[pt].g22; gsel[1][2] = gb[pt].g23;
    gsel[2][0] = gb[pt].g13; gsel[2][1] = gb[pt].g23; gsel[2][2] = gb[pt].g33;
    for (int g = 0; g < 3; g++) begin
      ma[g]  = '0;
      mb[g]  = '0;
      ain[g] = (l == '0) ? '0 : acc[g];
    end
    unique case (state)
      S_GRAD: begin
        ma[0] = dm[ii * NP + ll]; mb[0] = ub[ix_l];
        ma[1] = dm[jj * NP + ll]; mb[1] = ub[ix_j];
        ma[2] = dm[kk * NP + ll]; mb[2] = ub[ix_k];
      end
      S_GEOM: begin
        for (int g = 0; g < 3; g++) begin
          ma[g] = gsel[g][ll];
          mb[g] = (l == LW'(0)) ? rb[pt] : (l == LW'(1)) ? sb[pt] : tb[pt];
        end
      end
      S_DIV: begin
        ma[0] = dm[ll * NP + ii]; mb[0] = rb[ix_l];
        ma[1] = dm[ll * NP + jj]; mb[1] = sb[ix_j];
        ma[2] = dm[ll * NP + kk]; mb[2] = tb[ix_k];
      end
      default: ;
    endcase
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_w     = wb[pt];
  assign busy      = (state != S_LOAD) || (pt != '0);

  logic last_pt;
  assign last_pt = (pt == PW'(NP3 - 1));

  // (i,j,k) and pt of the next point
  logic [PW-1:0] pt_n;
  logic [LW-1:0] ci_n, cj_n, ck_n;
  always_comb begin
    pt_n = last_pt ? '0 : pt + 1'b1;
    ci_n = ci; cj_n = cj; ck_n = ck;
    if (ci == LW'(NP - 1)) begin
      ci_n = '0;
      if (cj == LW'(NP - 1)) begin
        cj_n = '0;
        ck_n = (ck == LW'(NP - 1)) ? '0 : ck + 1'b1;
      end else begin
        cj_n = cj + 1'b1;
      end
    end else begin
      ci_n = ci + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (d_we) dm[d_addr] <= d_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      pt <= '0; ci <= '0; cj <= '0; ck <= '0; l <= '0;
      for (int g = 0; g < 3; g++) acc[g] <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          ub[pt] <= in_u;
          gb[pt] <= in_g;
          begin pt <= pt_n; ci <= ci_n; cj <= cj_n; ck <= ck_n; end
          if (last_pt) state <= S_GRAD;
        end
        S_GRAD: begin
          for (int g = 0; g < 3; g++) acc[g] <= mo[g];
          if (l == LW'(NP - 1)) begin
            rb[pt] <= mo[0]; sb[pt] <= mo[1]; tb[pt] <= mo[2];
            l <= '0;
            begin pt <= pt_n; ci <= ci_n; cj <= cj_n; ck <= ck_n; end
            if (last_pt) state <= S_GEOM;
          end else begin
            l <= l + 1'b1;
          end
        end
        S_GEOM: begin
          for (int g = 0; g < 3; g++) acc[g] <= mo[g];
          if (l == LW'(2)) begin
            rb[pt] <= mo[0]; sb[pt] <= mo[1]; tb[pt] <= mo[2];
            l <= '0;
            begin pt <= pt_n; ci <= ci_n; cj <= cj_n; ck <= ck_n; end
            if (last_pt) state <= S_DIV;
          end else begin
            l <= l + 1'b1;
          end
        end
        S_DIV: begin
          for (int g = 0; g < 3; g++) acc[g] <= mo[g];
          if (l == LW'(NP - 1)) begin
            wb[pt] <= sum012;
            l <= '0;
            begin pt <= pt_n; ci <= ci_n; cj <= cj_n; ck <= ck_n; end
            if (last_pt) state <= S_OUT;
          end else begin
            l <= l + 1'b1;
          end
        end
        S_OUT: if (out_ready) begin
          begin pt <= pt_n; ci <= ci_n; cj <= cj_n; ck <= ck_n; end
          if (last_pt) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // a stream beat, once offered, stays offered until it is taken
  logic held;
  fp_t  held_w;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held   <= 1'b0;
      held_w <= '0;
    end else begin
      held   <= out_valid && !out_ready;
      held_w <= out_w;
      if (held) a_out_hold: assert (out_valid && out_w == held_w);
    end
  end
endmodule
