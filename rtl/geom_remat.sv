// geom_remat: on-the-fly ("rematerialised") geometric factors.
//
// Instead of reading six precomputed factors per point from memory, the
// factors of a point are recomputed from data stored per element:
//     G = (w_i * w_j * w_k) * detJ * Jinv * Jinv^T
// where Jinv is the inverse Jacobian of the element's mapping onto the
// reference cube, detJ its determinant and w_i, w_j, w_k the 1-D
// Gauss-Lobatto-Legendre quadrature weights of the point.  Only the six
// independent entries of the symmetric result are formed: each is a 3-term
// dot product of two rows of Jinv (3 multiplies, 2 adds), scaled by the
// point's weight product times detJ (3 multiplies once per point, 1 per
// entry), 39 floating-point operations per point.
//
// The idea of trading arithmetic for memory traffic, precomputing only the
// inverse Jacobian (which needs a division) and forming G on the fly, and
// the restriction to elements that are not curved follow the source.  Taking
// Jinv and detJ constant over an element, which is exact for elements that
// are affine images of the reference cube, is this design's reading of
// "linearly deformed"; a general trilinear element would need Jinv per
// point.  The unit is combinational: its output is valid in the cycle its
// inputs are.  cg_solver uses it when built with REMAT = 1, feeding it the
// element and point currently streamed into the element operator.
module geom_remat
  import sem_pkg::*;
(
  input  fp_t   jinv [3][3],   // inverse Jacobian of the element, [row][col]
  input  fp_t   detj,          // Jacobian determinant of the element
  input  fp_t   wi,            // quadrature weights of the point
  input  fp_t   wj,
  input  fp_t   wk,
  output geom_t g
);
  fp_t wij, wijk, s;
  fp_mul u_wij  (.a(wi),   .b(wj),   .y(wij));
  fp_mul u_wijk (.a(wij),  .b(wk),   .y(wijk));
  fp_mul u_s    (.a(wijk), .b(detj), .y(s));

  // entry order G11, G12, G13, G22, G23, G33 as in geom_t
  localparam int RA [6] = '{0, 0, 0, 1, 1, 2};
  localparam int RB [6] = '{0, 1, 2, 1, 2, 2};

  fp_t ge [6];
  for (genvar e = 0; e < 6; e++) begin : g_entry
    fp_t p0, p1, p2, s01, dot;
    fp_mul u_p0 (.a(jinv[RA[e]][0]), .b(jinv[RB[e]][0]), .y(p0));
    fp_mul u_p1 (.a(jinv[RA[e]][1]), .b(jinv[RB[e]][1]), .y(p1));
    fp_mul u_p2 (.a(jinv[RA[e]][2]), .b(jinv[RB[e]][2]), .y(p2));
    fp_add u_a0 (.a(p0),  .b(p1), .y(s01));
    fp_add u_a1 (.a(s01), .b(p2), .y(dot));
    fp_mul u_sc (.a(dot), .b(s),  .y(ge[e]));
  end

  assign g = '{g11: ge[0], g12: ge[1], g13: ge[2], g22: ge[3], g23: ge[4], g33: ge[5]};
endmodule
