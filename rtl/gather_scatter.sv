// gather_scatter: direct-stiffness summation Q Q^T with boundary masking.
//
// In the local (element-by-element) layout a mesh point that lies on an
// element face, edge or corner is stored once per element that touches it.
// This unit makes all copies of such a point equal to the sum of the
// copies, and then forces to zero every copy that lies on the Dirichlet
// boundary of the domain.  Each local point carries the number of its
// global point (gid) and a boundary flag (mask).
//
// It works in three passes over on-chip storage:
//   CLEAR    num_global cycles  acc[g] = 0
//   GATHER   num_local cycles   acc[gid[l]] += w[l]
//   SCATTER  num_local cycles   w[l] = mask[l] ? 0 : acc[gid[l]]
// The result does not depend on how the elements are ordered, so meshes
// of any connectivity are handled.  The function, summing values that share
// a position in space and masking the boundary afterwards, follows the
// source.  The accumulation array kept beside the unit is this design's
// choice: the measured accelerator does one unaligned external-memory
// load and store per boundary value instead, and names on-chip buffering
// of mesh partitions as the way to speed this step up.
//
// Interface: a one-cycle start pulse begins the passes; busy is high until
// done pulses for one cycle.  During GATHER and SCATTER the unit drives idx
// and expects w_rdata, gid_rdata and mask_rdata of that local point in the
// same cycle (asynchronous-read storage); the result is written with w_we.
module gather_scatter
  import sem_pkg::*;
#(
  parameter int MAX_LOCAL  = 1024,
  parameter int MAX_GLOBAL = MAX_LOCAL,
  parameter int LAW = $clog2(MAX_LOCAL),
  parameter int GAW = $clog2(MAX_GLOBAL)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [LAW:0]   num_local,
  input  logic [GAW:0]   num_global,
  output logic           busy,
  output logic           done,
  output logic [LAW-1:0] idx,
  input  fp_t            w_rdata,
  input  logic [GAW-1:0] gid_rdata,
  input  logic           mask_rdata,
  output logic           w_we,
  output fp_t            w_wdata
);
  typedef enum logic [1:0] {G_IDLE, G_CLEAR, G_GATHER, G_SCATTER} gstate_e;
  gstate_e state;

  fp_t acc [MAX_GLOBAL];
  logic [LAW:0] cnt;
  fp_t sum;

  fp_add u_add (.a(acc[gid_rdata]), .b(w_rdata), .y(sum));

  assign idx     = cnt[LAW-1:0];
  assign busy    = (state != G_IDLE);
  assign w_we    = (state == G_SCATTER);
  assign w_wdata = mask_rdata ? '0 : acc[gid_rdata];

  // one write port: clear during CLEAR, accumulate during GATHER
  logic           acc_we;
  logic [GAW-1:0] acc_wa;
  fp_t            acc_wd;
  assign acc_we = (state == G_CLEAR) || (state == G_GATHER);
  assign acc_wa = (state == G_CLEAR) ? cnt[GAW-1:0] : gid_rdata;
  assign acc_wd = (state == G_CLEAR) ? '0 : sum;

  always_ff @(posedge clk) begin
    if (acc_we) acc[acc_wa] <= acc_wd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        G_IDLE: if (start) begin
          cnt   <= '0;
          state <= (num_global != '0) ? G_CLEAR : G_GATHER;
        end
        G_CLEAR: begin
          if (cnt == (LAW+1)'(num_global) - 1'b1) begin
            cnt <= '0; state <= G_GATHER;
          end else cnt <= cnt + 1'b1;
        end
        G_GATHER: begin
          if (cnt + 1'b1 >= num_local) begin
            cnt <= '0; state <= G_SCATTER;
          end else cnt <= cnt + 1'b1;
        end
        G_SCATTER: begin
          if (cnt + 1'b1 >= num_local) begin
            cnt <= '0; state <= G_IDLE; done <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= G_IDLE;
      endcase
    end
  end

  // every local point must name a global point that was cleared
  // (an immediate check: a concurrent one would sample the whole gid array)
  always_ff @(posedge clk) begin
    if (rst_n && (state == G_GATHER || state == G_SCATTER))
      a_gid_range: assert ({1'b0, gid_rdata} < num_global);
  end
endmodule
