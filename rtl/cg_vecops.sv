// cg_vecops: the vector work of one conjugate-gradient iteration outside
// the operator evaluation: the two weighted inner products and the fused
// solution/residual update.
//
// Operations (op, sampled at start), one local point per clock cycle:
//   VOP_DOT_RR  acc = sum_l r[l]*r[l]*c[l]
//   VOP_DOT_PW  acc = sum_l p[l]*w[l]*c[l]                 (CG line 8)
//   VOP_UPDATE  x[l] += alpha*p[l];  r[l] -= alpha*w[l];
//               acc = sum_l r_new[l]*r_new[l]*c[l]          (CG lines 9-11)
// c is the inverse multiplicity of each local point, so that a point that
// is stored once per element touching it is counted once in a reduction.
// Fusing lines 9 to 11 into one pass, so that x, r and w are read once
// between two synchronisation points, follows the source; the weight
// vector c and its use in the products are the source's as well.  One
// point per cycle with a combinational multiply-add chain and a serial
// accumulator is this design's simplification of the replicated, pipelined
// lanes an HLS compiler builds.
//
// Interface: start pulse, then idx runs 0..n-1 and the unit expects the
// array values of point idx in the same cycle; x_we/r_we write the updated
// values back at idx.  done pulses for one cycle after the last point, with
// acc valid from then until the next start.  Latency is n+1 cycles.
module cg_vecops
  import sem_pkg::*;
#(
  parameter int MAX_LOCAL = 1024,
  parameter int LAW = $clog2(MAX_LOCAL)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  vop_e           op,
  input  logic [LAW:0]   n,
  input  fp_t            alpha,
  output logic           busy,
  output logic           done,
  output logic [LAW-1:0] idx,
  input  fp_t            x_i,
  input  fp_t            r_i,
  input  fp_t            p_i,
  input  fp_t            w_i,
  input  fp_t            c_i,
  output logic           x_we,
  output fp_t            x_wdata,
  output logic           r_we,
  output fp_t            r_wdata,
  output fp_t            acc
);
  logic         run;
  vop_e         op_q;
  logic [LAW:0] cnt;

  fp_t ap, aw, neg_aw, x_new, r_new, da, db, dab, dabc, acc_n;

  fp_mul u_ap   (.a(alpha), .b(p_i), .y(ap));
  fp_mul u_aw   (.a(alpha), .b(w_i), .y(aw));
  assign neg_aw = {~aw[FP_W-1], aw[FP_W-2:0]};
  fp_add u_x    (.a(x_i), .b(ap),     .y(x_new));
  fp_add u_r    (.a(r_i), .b(neg_aw), .y(r_new));

  always_comb begin
    unique case (op_q)
      VOP_DOT_PW: begin da = p_i;   db = w_i;   end
      VOP_UPDATE: begin da = r_new; db = r_new; end
      default:    begin da = r_i;   db = r_i;   end
    endcase
  end
  fp_mul u_dab  (.a(da),  .b(db),  .y(dab));
  fp_mul u_dabc (.a(dab), .b(c_i), .y(dabc));
  fp_add u_acc  (.a(acc), .b(dabc), .y(acc_n));

  assign idx     = cnt[LAW-1:0];
  assign busy    = run;
  assign x_we    = run && (op_q == VOP_UPDATE);
  assign r_we    = run && (op_q == VOP_UPDATE);
  assign x_wdata = x_new;
  assign r_wdata = r_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      op_q <= VOP_DOT_RR;
      cnt  <= '0;
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          op_q <= op;
          cnt  <= '0;
          acc  <= '0;
          run  <= (n != '0);
          done <= (n == '0);
        end
      end else begin
        acc <= acc_n;
        if (cnt + 1'b1 >= n) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) run |-> !start);
endmodule
