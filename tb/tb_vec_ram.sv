// tb_vec_ram: self-checking test of the array storage: random writes
// compared with a model, asynchronous read in the same cycle as the
// address, and read-before-write when both ports use one address.
module tb_vec_ram;
  localparam int W = 32, DEPTH = 256, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;

  vec_ram #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = $urandom; model[a] = wdata;
    end
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = AW'($urandom_range(0, DEPTH - 1));
      wdata = $urandom;
      raddr = ($urandom_range(0, 3) == 0) ? waddr : AW'($urandom_range(0, DEPTH - 1));
      #1;
      checks++;
      if (rdata != model[raddr]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %h exp %h", raddr, rdata, model[raddr]);
      end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
