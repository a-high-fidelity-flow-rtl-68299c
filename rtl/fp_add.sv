// fp_add: combinational IEEE-754 adder, y = a + b.
//
// Operands are unpacked with their hidden bit, the smaller one is shifted
// right with guard/round/sticky bits, the magnitudes are added or
// subtracted, the result is renormalised with a leading-zero shift and
// rounded to nearest, ties to even.  Subnormal inputs and results are
// flushed to zero and an exponent overflow gives infinity; NaN is not
// produced or propagated.  These simplifications are this design's own:
// the solver relies on the FPGA vendor's floating-point cores, which the
// source describes only by the precision they implement.
module fp_add #(
  parameter int EW = sem_pkg::FP_EW,
  parameter int MW = sem_pkg::FP_MW
) (
  input  logic [EW+MW:0] a,
  input  logic [EW+MW:0] b,
  output logic [EW+MW:0] y
);
  localparam int FW = MW + 4;              // hidden + mantissa + G,R,S
  localparam int EMAX = (1 << EW) - 1;

  logic          sa, sb, sbig, ssml;
  logic [EW-1:0] ea, eb;
  logic [MW-1:0] ma, mb;
  logic [FW-1:0] mbig, msml, msh;
  logic [FW:0]   sum;
  logic [MW+1:0] mr;
  int            ebig, esml, d, e;
  logic          az, bz, sticky, rnd;

  always_comb begin
    sa = a[EW+MW]; ea = a[EW+MW-1:MW]; ma = a[MW-1:0];
    sb = b[EW+MW]; eb = b[EW+MW-1:MW]; mb = b[MW-1:0];
    az = (ea == '0);
    bz = (eb == '0);
    y = '0;
    mbig = '0; msml = '0; msh = '0; sum = '0; mr = '0;
    ebig = 0; esml = 0; d = 0; e = 0; sticky = 1'b0; rnd = 1'b0;
    sbig = 1'b0; ssml = 1'b0;
    if (az && bz) begin
      y = '0;
    end else if (az) begin
      y = b;
    end else if (bz) begin
      y = a;
    end else begin
      if ({ea, ma} >= {eb, mb}) begin
        sbig = sa; ebig = int'(ea); mbig = {1'b1, ma, 3'b000};
        ssml = sb; esml = int'(eb); msml = {1'b1, mb, 3'b000};
      end else begin
        sbig = sb; ebig = int'(eb); mbig = {1'b1, mb, 3'b000};
        ssml = sa; esml = int'(ea); msml = {1'b1, ma, 3'b000};
      end
      d = ebig - esml;
      if (d >= FW) begin
        msh = {{(FW-1){1'b0}}, 1'b1};      // only the sticky bit survives
      end else begin
        msh    = msml >> d;
        sticky = |(msml & ((FW'(1) << d) - FW'(1)));
        msh[0] = msh[0] | sticky;
      end
      e = ebig;
      if (sbig == ssml) begin
        sum = {1'b0, mbig} + {1'b0, msh};
        if (sum[FW]) begin
          sum = {1'b0, sum[FW:2], sum[1] | sum[0]};
          e   = e + 1;
        end
      end else begin
        sum = {1'b0, mbig} - {1'b0, msh};
        for (int i = 0; i < FW; i++) begin
          if (sum[FW-1] == 1'b0 && sum != '0) begin
            sum = sum << 1;
            e   = e - 1;
          end
        end
      end
      if (sum == '0) begin
        y = '0;
      end else begin
        rnd = sum[2] & (sum[1] | sum[0] | sum[3]);
        mr  = {1'b0, sum[FW-1:3]} + (MW+2)'(rnd);
        if (mr[MW+1]) begin
          mr = mr >> 1;
          e  = e + 1;
        end
        if (e <= 0)         y = {sbig, {(EW+MW){1'b0}}};
        else if (e >= EMAX) y = {sbig, {EW{1'b1}}, {MW{1'b0}}};
        else                y = {sbig, e[EW-1:0], mr[MW-1:0]};
      end
    end
  end
endmodule
