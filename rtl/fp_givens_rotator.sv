// fp_givens_rotator: pipelined floating-point Givens rotation unit.
//
// Computes Givens rotations on floating-point pairs with a fixed-point CORDIC
// core.  Each X/Y pair is first turned into block floating point (two aligned
// N-bit significands sharing the larger exponent), the significands are
// sign-extended by two integer bits and run through ITER CORDIC microrotation
// stages, and the results are converted back to two independent
// floating-point numbers with the shared exponent, which bypasses the CORDIC
// core through a delay line.  The single control input vr_i marks a pair
// whose angle is to be computed (vectoring: the unit drives Y to zero); the
// pairs that follow with vr_i = 0 are rotated by that angle.  To rotate two
// rows of e elements, send the leading pair with vr_i = 1 and the other e-1
// pairs with vr_i = 0 on consecutive clocks; the next row pair may follow at
// once.  Outputs carry the uncompensated CORDIC gain K ~ 1.6468.
//
// HUB=1 (default) builds the Half-Unit-Biased version: inputs, internal words
// and outputs are HUB numbers (an implicit 1 below the LSB), which turns
// negation into inversion and rounding into truncation.  HUB=0 builds the
// conventional version with two's complement arithmetic, optional input
// rounding (IN_ROUND) and round-to-nearest-even at the output.
//
// Operand format: {sign, E-bit biased exponent, M-1 fraction bits}; an
// exponent field of zero means zero.  Latency: 2 (input converter) + ITER
// (CORDIC) + 3 (output converter) clocks (IN_STAGES + ITER + OUT_STAGES); throughput one pair
// per clock.  Defaults: single precision (E=8, M=24), N=26, ITER=24, HUB with
// unbiased extension and identity detection, as in the configuration the
// paper uses for its fixed-point comparison.  vr_o is vr_i delayed by LATENCY.
module fp_givens_rotator
  import givens_pkg::*;
#(
  parameter bit          HUB      = 1'b1,
  parameter int unsigned E        = EXP_W_DEF,
  parameter int unsigned M        = SIG_W_DEF,
  parameter int unsigned N        = FIX_W_DEF,
  parameter int unsigned ITER     = ITER_DEF,
  parameter bit          IN_ROUND = 1'b0,   // conventional only: round at input alignment
  parameter bit          UNBIASED = 1'b1,   // HUB only: unbiased extensions
  parameter bit          DETECT_I = 1'b1    // HUB only: identity-matrix 1.0 detection
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           vr_i,      // 1: vectoring (new angle), 0: rotation
  input  logic [E+M-1:0] x_i,
  input  logic [E+M-1:0] y_i,
  output logic           vr_o,
  output logic [E+M-1:0] x_o,
  output logic [E+M-1:0] y_o
);

  localparam int unsigned W       = N + INT_GUARD;

  logic signed [N-1:0] xfix, yfix;
  logic [E-1:0]        mexp;
  logic                vr_fix;
  logic signed [W-1:0] xrot, yrot;
  logic                vr_rot;
  logic [E-1:0]        exp_dly [ITER+1];

  // ---------------- input converter
  if (HUB) begin : g_in_hub
    fp_in_conv_hub #(.E(E), .M(M), .N(N), .UNBIASED(UNBIASED), .DETECT_I(DETECT_I)) u_in (
      .clk(clk), .rst_n(rst_n), .x_i(x_i), .y_i(y_i), .vr_i(vr_i),
      .xfix_o(xfix), .yfix_o(yfix), .mexp_o(mexp), .vr_o(vr_fix)
    );
  end else begin : g_in_ieee
    fp_in_conv_ieee #(.E(E), .M(M), .N(N), .ROUND(IN_ROUND)) u_in (
      .clk(clk), .rst_n(rst_n), .x_i(x_i), .y_i(y_i), .vr_i(vr_i),
      .xfix_o(xfix), .yfix_o(yfix), .mexp_o(mexp), .vr_o(vr_fix)
    );
  end

  // ---------------- fixed-point CORDIC core (sign extension by INT_GUARD bits)
  fix_givens_rotator #(.W(W), .ITER(ITER), .HUB(HUB)) u_core (
    .clk  (clk),
    .rst_n(rst_n),
    .vr_i (vr_fix),
    .x_i  (W'(xfix)),
    .y_i  (W'(yfix)),
    .vr_o (vr_rot),
    .x_o  (xrot),
    .y_o  (yrot)
  );

  // ---------------- common exponent travels beside the core
  assign exp_dly[0] = mexp;
  for (genvar i = 0; i < ITER; i++) begin : g_exp
    always_ff @(posedge clk) exp_dly[i+1] <= exp_dly[i];
  end

  // ---------------- output converter
  if (HUB) begin : g_out_hub
    fp_out_conv_hub #(.E(E), .M(M), .N(N), .W(W), .UNBIASED(UNBIASED)) u_out (
      .clk(clk), .rst_n(rst_n), .exp_i(exp_dly[ITER]), .xfix_i(xrot), .yfix_i(yrot),
      .vr_i(vr_rot), .x_o(x_o), .y_o(y_o), .vr_o(vr_o)
    );
  end else begin : g_out_ieee
    fp_out_conv_ieee #(.E(E), .M(M), .N(N), .W(W)) u_out (
      .clk(clk), .rst_n(rst_n), .exp_i(exp_dly[ITER]), .xfix_i(xrot), .yfix_i(yrot),
      .vr_i(vr_rot), .x_o(x_o), .y_o(y_o), .vr_o(vr_o)
    );
  end

endmodule
