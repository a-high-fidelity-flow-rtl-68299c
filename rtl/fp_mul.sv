// fp_mul: combinational IEEE-754 multiplier, y = a * b.
//
// The two significands (with hidden bits) are multiplied in full, the
// product is normalised by at most one position and rounded to nearest,
// ties to even.  Subnormals flush to zero, overflow gives infinity, NaN is
// not handled.  These simplifications are this design's own choice; the
// accelerator uses the FPGA's hardened floating-point DSP blocks.
module fp_mul #(
  parameter int EW = sem_pkg::FP_EW,
  parameter int MW = sem_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int BIAS = (1 << (EW-1)) - 1;
  localparam int EMAX = (1 << EW) - 1;

  logic              s;
  logic [2*MW+1:0]   prod;
  logic [MW:0]       mr;
  logic [MW-1:0]     mant;
  logic              g, st, rnd;
  int                e;

  always_comb begin
    s    = a[EW+MW] ^ b[EW+MW];
    prod = {1'b1, a[MW-1:0]} * {1'b1, b[MW-1:0]};
    e    = int'(a[EW+MW-1:MW]) + int'(b[EW+MW-1:MW]) - BIAS;
    if (prod[2*MW+1]) begin
      mant = prod[2*MW:MW+1];
      g    = prod[MW];
      st   = |prod[MW-1:0];
      e    = e + 1;
    end else begin
      mant = prod[2*MW-1:MW];
      g    = prod[MW-1];
      st   = |prod[MW-2:0];
    end
    rnd = g & (st | mant[0]);
    mr  = {1'b0, mant} + (MW+1)'(rnd);
    if (mr[MW]) e = e + 1;              // mantissa wrapped to zero: 2.0
    if (a[EW+MW-1:MW] == '0 || b[EW+MW-1:MW] == '0) y = '0;
    else if (e <= 0)                                y = {s, {(EW+MW){1'b0}}};
    else if (e >= EMAX)                             y = {s, {EW{1'b1}}, {MW{1'b0}}};
    else                                            y = {s, e[EW-1:0], mr[MW-1:0]};
  end
endmodule
