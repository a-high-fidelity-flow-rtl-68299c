// tb_fp_pkg: conversions between the solver's floating-point format and
// SystemVerilog real, used by the testbenches to build reference results.
// A value is converted by re-biasing its exponent into binary64 and
// left-aligning its mantissa; real-to-format conversion truncates.
package tb_fp_pkg;
  import sem_pkg::*;
  localparam int BIAS = (1 << (FP_EW-1)) - 1;

  function automatic real to_real(fp_t f);
    logic [63:0] d;
    int e;
    e = int'(f[FP_W-2:FP_MW]);
    if (e == 0) return 0.0;
    d = {f[FP_W-1], 11'(e - BIAS + 1023), 52'(f[FP_MW-1:0]) << (52 - FP_MW)};
    return $bitstoreal(d);
  endfunction

  function automatic fp_t from_real(real r);
    logic [63:0] d;
    int e;
    fp_t f;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + BIAS;
    if (d[62:52] == 11'd0 || e <= 0) return '0;
    f = {d[63], FP_EW'(e), d[51:52-FP_MW]};
    return f;
  endfunction

  function automatic real fabs(real r);
    return (r < 0.0) ? -r : r;
  endfunction

  // relative closeness with an absolute floor
  function automatic bit close(real got, real exp, real rel, real floor);
    return fabs(got - exp) <= rel * fabs(exp) + floor;
  endfunction
endpackage
