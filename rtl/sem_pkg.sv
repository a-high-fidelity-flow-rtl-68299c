// sem_pkg: types and constants shared by the spectral-element CG solver.
//
// The number format of every datapath is fixed here: FP_EW exponent bits and
// FP_MW stored mantissa bits of an IEEE-754 binary format.  The default is
// single precision (8/23); double precision is obtained by setting 11/52.
// Both precisions are evaluated as separate accelerator builds; the
// single-precision build is the default of this RTL.
//
// A geometric-factor record holds the six independent entries of the
// symmetric 3x3 tensor G at one quadrature point, in the order
// G11, G12, G13, G22, G23, G33 (this ordering is a choice of this RTL).
package sem_pkg;
  localparam int FP_EW = 8;
  localparam int FP_MW = 23;
  localparam int FP_W  = 1 + FP_EW + FP_MW;

  typedef logic [FP_W-1:0] fp_t;

  typedef struct packed {
    fp_t g11;
    fp_t g12;
    fp_t g13;
    fp_t g22;
    fp_t g23;
    fp_t g33;
  } geom_t;

  // Operations of the vector unit (lines 8 and 9-11 of the CG algorithm)
  typedef enum logic [1:0] {
    VOP_DOT_RR = 2'd0,   // acc = sum r*r*c
    VOP_DOT_PW = 2'd1,   // acc = sum p*w*c
    VOP_UPDATE = 2'd2    // x += alpha p ; r -= alpha w ; acc = sum r*r*c
  } vop_e;

  // Arrays the host can write and read
  typedef enum logic [4:0] {
    SEL_X    = 5'd0,
    SEL_R    = 5'd1,
    SEL_P    = 5'd2,
    SEL_W    = 5'd3,
    SEL_C    = 5'd4,
    SEL_G11  = 5'd5,
    SEL_G12  = 5'd6,
    SEL_G13  = 5'd7,
    SEL_G22  = 5'd8,
    SEL_G23  = 5'd9,
    SEL_G33  = 5'd10,
    SEL_GID  = 5'd11,
    SEL_MASK = 5'd12,
    SEL_D    = 5'd13,
    // rematerialised geometry (REMAT builds): per-element inverse Jacobian
    // (row-major, SEL_JINV + 3*row + col), its determinant, and the 1-D
    // quadrature weights (address = GLL index)
    SEL_JINV = 5'd14,
    SEL_DETJ = 5'd23,
    SEL_WQ   = 5'd24
  } sel_e;
endpackage
