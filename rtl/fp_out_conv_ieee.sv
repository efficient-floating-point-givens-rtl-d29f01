// fp_out_conv_ieee: block-fixed-point to floating-point output converter for
// conventional (IEEE-754-like) results.
//
// Both rotated significands share the exponent that travelled alongside the
// CORDIC pipeline.  For each coordinate: the sign bit is the MSB of the W-bit
// two's complement word; the magnitude is the word or its two's complement
// (W-1 bits); the normalization module shifts it left until its MSB is one
// and reports the shift; the new exponent is the common exponent plus the
// weight of the magnitude's MSB (INT_GUARD, the two integer bits the CORDIC
// pipeline added) minus that shift; the M upper bits are kept (hidden one
// included) and rounded to nearest, ties to even, with a guard and a sticky
// bit from the W-1-M discarded bits.  A rounding carry out of the significand
// bumps the exponent.  Results whose exponent falls to zero or below, and zero
// magnitudes, are flushed to +0; results whose exponent reaches the all-ones
// code saturate to the largest finite value of that sign.
//
// Timing: three pipeline stages (absolute value / normalize and exponent /
// round and pack); one pair per clock; vr is delayed alongside so that the
// caller can tell vectoring results from rotation results.  The dataflow is
// the paper's (Fig. 4); the flush-to-zero on underflow is stated by the
// paper, while the saturation on overflow and the +0 for a zero magnitude are
// this design's choices because the paper leaves that logic out.
module fp_out_conv_ieee
  import givens_pkg::*;
#(
  parameter int unsigned E = EXP_W_DEF,
  parameter int unsigned M = SIG_W_DEF,
  parameter int unsigned N = FIX_W_DEF,
  parameter int unsigned W = FIX_W_DEF + INT_GUARD
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [E-1:0]        exp_i,
  input  logic signed [W-1:0] xfix_i,
  input  logic signed [W-1:0] yfix_i,
  input  logic                vr_i,
  output logic [E+M-1:0]      x_o,
  output logic [E+M-1:0]      y_o,
  output logic                vr_o
);

  if (W < M + 3) begin : g_bad_width
    $error("fp_out_conv_ieee: W must be at least M+3");
  end

  localparam int unsigned MW    = W - 1;            // magnitude width
  localparam int unsigned CW    = $clog2(MW);
  localparam int signed   MSB_W = int'(W) - int'(N); // weight of the magnitude MSB
  localparam int signed   EMAX  = (1 << E) - 1;

  // ---------------- stage 1: sign and absolute value
  logic          s1_sgn [2];
  logic [MW-1:0] s1_mag [2];
  logic [E-1:0]  s1_exp;
  logic          s1_vr;

  always_ff @(posedge clk) begin
    s1_sgn[0] <= xfix_i[W-1];
    s1_sgn[1] <= yfix_i[W-1];
    s1_mag[0] <= MW'(xfix_i[W-1] ? -xfix_i : xfix_i);
    s1_mag[1] <= MW'(yfix_i[W-1] ? -yfix_i : yfix_i);
    s1_exp    <= exp_i;
  end

  // ---------------- stage 2: normalize, exponent update
  logic [MW-1:0] nrm   [2];
  logic [CW-1:0] shamt [2];
  logic          zro   [2];

  for (genvar c = 0; c < 2; c++) begin : g_norm
    fp_normalize #(.WIDTH(MW), .CNT_W(CW)) u_norm (
      .value_i(s1_mag[c]),
      .norm_o (nrm[c]),
      .shift_o(shamt[c]),
      .zero_o (zro[c])
    );
  end

  logic              s2_sgn [2];
  logic [MW-1:0]     s2_nrm [2];
  logic signed [E+1:0] s2_exp [2];
  logic              s2_zro [2];
  logic              s2_vr;

  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      s2_sgn[c] <= s1_sgn[c];
      s2_nrm[c] <= nrm[c];
      s2_exp[c] <= $signed({2'b00, s1_exp}) + (E+2)'(MSB_W) - $signed((E+2)'(shamt[c]));
      s2_zro[c] <= zro[c];
    end
  end

  // ---------------- stage 3: round to nearest even, exceptions, pack
  logic [E+M-1:0] res [2];

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      logic [M-1:0]        sig;
      logic                guard, sticky, up;
      logic [M:0]          sum;
      logic signed [E+1:0] ee;
      sig    = s2_nrm[c][MW-1 -: M];
      guard  = s2_nrm[c][MW-1-M];
      sticky = |s2_nrm[c][MW-2-M:0];
      up     = guard & (sticky | sig[0]);
      sum    = {1'b0, sig} + (M+1)'(up);
      ee     = s2_exp[c];
      if (sum[M]) begin           // 1.11..1 rounded up to 10.00..0
        sig = sum[M:1];
        ee  = ee + 1'b1;
      end else begin
        sig = sum[M-1:0];
      end
      if (s2_zro[c] || ee <= 0)
        res[c] = '0;
      else if (ee >= (E+2)'(EMAX))
        res[c] = {s2_sgn[c], E'(EMAX - 1), {(M-1){1'b1}}};
      else
        res[c] = {s2_sgn[c], ee[E-1:0], sig[M-2:0]};
    end
  end

  always_ff @(posedge clk) begin
    x_o <= res[0];
    y_o <= res[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vr <= 1'b0;
      s2_vr <= 1'b0;
      vr_o  <= 1'b0;
    end else begin
      s1_vr <= vr_i;
      s2_vr <= s1_vr;
      vr_o  <= s2_vr;
    end
  end

endmodule
