// fp_div: combinational IEEE-754 divider, y = a / b.
//
// The significand quotient is formed by an integer division of the
// dividend significand, shifted left by MW+3 places, by the divisor
// significand; the remainder feeds the sticky bit and the result is
// rounded to nearest, ties to even.  Subnormals flush to zero, division by
// zero gives infinity, NaN is not handled (this design's simplifications).
// In the solver it is used only for the two scalar divisions per CG
// iteration (alpha and beta), so its size does not matter for throughput.
module fp_div #(
  parameter int EW = sem_pkg::FP_EW,
  parameter int MW = sem_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int BIAS = (1 << (EW-1)) - 1;
  localparam int EMAX = (1 << EW) - 1;
  localparam int QW   = 2*MW + 4;

  logic          s;
  logic [QW-1:0] num, den, q, rem;
  logic [MW-1:0] mant;
  logic [MW:0]   mr;
  logic          g, st, rnd;
  int            e;

  always_comb begin
    s   = a[EW+MW] ^ b[EW+MW];
    num = QW'({1'b1, a[MW-1:0]}) << (MW + 3);
    den = QW'({1'b1, b[MW-1:0]});
    q   = num / den;
    rem = num % den;
    e   = int'(a[EW+MW-1:MW]) - int'(b[EW+MW-1:MW]) + BIAS;
    if (q[MW+3]) begin
      mant = q[MW+2:3];
      g    = q[2];
      st   = q[1] | q[0] | (rem != '0);
    end else begin
      mant = q[MW+1:2];
      g    = q[1];
      st   = q[0] | (rem != '0);
      e    = e - 1;
    end
    rnd = g & (st | mant[0]);
    mr  = {1'b0, mant} + (MW+1)'(rnd);
    if (mr[MW]) e = e + 1;
    if (a[EW+MW-1:MW] == '0)      y = {s, {(EW+MW){1'b0}}};
    else if (b[EW+MW-1:MW] == '0) y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else if (e <= 0)              y = {s, {(EW+MW){1'b0}}};
    else if (e >= EMAX)           y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else                          y = {s, e[EW-1:0], mr[MW-1:0]};
  end
endmodule
