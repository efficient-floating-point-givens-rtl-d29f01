// fix_givens_rotator: pipelined fixed-point Givens rotator.
//
// A chain of ITER cordic_stage instances, stage i shifting by i (i = 0 ..
// ITER-1).  A pair entered with vr_i = 1 is vectored: each stage picks the
// direction that drives Y to zero and remembers it, so the pair leaves with
// Y ~ 0 and X ~ K*sqrt(X^2+Y^2), where K = prod_i sqrt(1 + 2^-2i) ~ 1.6468 is
// the CORDIC gain, which is not compensated here.  Every pair entered after
// it with vr_i = 0 is rotated by the same angle (times K), until the next
// vectoring pair.  One pair enters and one leaves per clock; the latency is
// ITER cycles.  Because the directions are stored per stage, a new angle can
// be computed right after the last element of the previous row, with no gap.
//
// The datapath is W bits, two's complement (or HUB, HUB=1): the N-bit
// significands from the input converter sign-extended by two integer bits.
// The direction rule uses the sign of Y only, as in the paper, so vectoring
// converges for pairs whose angle lies within the CORDIC range of about
// +-99.7 degrees (in particular whenever X >= 0).
module fix_givens_rotator
  import givens_pkg::*;
#(
  parameter int unsigned W    = FIX_W_DEF + INT_GUARD,
  parameter int unsigned ITER = ITER_DEF,
  parameter bit          HUB  = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                vr_i,
  input  logic signed [W-1:0] x_i,
  input  logic signed [W-1:0] y_i,
  output logic                vr_o,
  output logic signed [W-1:0] x_o,
  output logic signed [W-1:0] y_o
);

  logic                vr [ITER+1];
  logic signed [W-1:0] xs [ITER+1];
  logic signed [W-1:0] ys [ITER+1];

  assign vr[0] = vr_i;
  assign xs[0] = x_i;
  assign ys[0] = y_i;

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    cordic_stage #(.W(W), .SHIFT(i), .HUB(HUB)) u_stage (
      .clk  (clk),
      .rst_n(rst_n),
      .vr_i (vr[i]),
      .x_i  (xs[i]),
      .y_i  (ys[i]),
      .vr_o (vr[i+1]),
      .x_o  (xs[i+1]),
      .y_o  (ys[i+1])
    );
  end

  assign vr_o = vr[ITER];
  assign x_o  = xs[ITER];
  assign y_o  = ys[ITER];

endmodule
