// vec_ram: storage for one solver array (one word per local point).
//
// One write port (written on the rising clock edge) and one read port with
// asynchronous read, so that a controller addressing point i in a cycle
// sees its value in the same cycle.  In the measured accelerator these
// arrays live in four external DDR4 banks; here they are modelled as
// on-chip memories of MAX_LOCAL words, a choice of this design that keeps
// the solver self-contained.  A write and a read of the same address in
// one cycle return the old value.
module vec_ram #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 1024,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
