// tb_gather_scatter: self-checking test of the gather-scatter/mask unit.
//
// Random local-to-global maps (several local copies per global point, some
// global points unused), random boundary flags and small integer values,
// which the adder sums exactly, so the expected output is exact.  The test
// models the asynchronous-read storage around the unit, checks every value
// written back, that every local point is written once, and the cycle
// count num_global + 2*num_local from start to done.
module tb_gather_scatter;
  import sem_pkg::*;
  import tb_fp_pkg::*;

  localparam int ML = 64, MG = 32;
  localparam int LAW = $clog2(ML), GAW = $clog2(MG);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done, w_we, mask_rdata;
  logic [LAW:0] num_local = '0;
  logic [GAW:0] num_global = '0;
  logic [LAW-1:0] idx;
  logic [GAW-1:0] gid_rdata;
  fp_t w_rdata, w_wdata;

  gather_scatter #(.MAX_LOCAL(ML), .MAX_GLOBAL(MG)) dut (.*);

  fp_t w [ML];
  logic [GAW-1:0] gid [ML];
  bit msk [ML];
  real expv [ML];
  int  nwr [ML];
  assign w_rdata    = w[idx];
  assign gid_rdata  = gid[idx];
  assign mask_rdata = msk[idx];

  int checks = 0, failures = 0;
  always @(posedge clk) if (w_we && rst_n) begin
    w[idx] <= w_wdata;
    nwr[idx]++;
    checks++;
    if (to_real(w_wdata) != expv[idx]) begin
      failures++;
      if (failures < 10) $display("FAIL l=%0d got %g exp %g", idx, to_real(w_wdata), expv[idx]);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real acc [MG];
    int nl, ng;
    longint c0, c1;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      nl = (t == 0) ? ML : $urandom_range(8, ML);
      ng = (t == 0) ? MG : $urandom_range(4, MG);
      for (int g = 0; g < MG; g++) acc[g] = 0.0;
      for (int l = 0; l < ML; l++) begin
        gid[l] = GAW'($urandom_range(0, ng - 1));
        msk[l] = ($urandom_range(0, 4) == 0);
        w[l]   = from_real(real'($urandom_range(0, 200)) - 100.0);
        nwr[l] = 0;
      end
      for (int l = 0; l < nl; l++) acc[gid[l]] += to_real(w[l]);
      for (int l = 0; l < nl; l++) expv[l] = msk[l] ? 0.0 : acc[gid[l]];
      @(negedge clk);
      num_local = (LAW+1)'(nl); num_global = (GAW+1)'(ng); start = 1'b1;
      c0 = $time / 10;
      @(negedge clk) start = 1'b0;
      while (!done) @(negedge clk);
      c1 = $time / 10;
      checks++;
      if (c1 - c0 != longint'(ng) + 2 * longint'(nl) + 1) begin
        failures++; $display("FAIL cycles %0d expected %0d", c1 - c0, ng + 2 * nl + 1);
      end
      for (int l = 0; l < ML; l++) begin
        checks++;
        if (nwr[l] != ((l < nl) ? 1 : 0)) begin failures++; $display("FAIL l=%0d written %0d times", l, nwr[l]); end
      end
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
