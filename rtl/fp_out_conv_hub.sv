// fp_out_conv_hub: block-fixed-point to floating-point output converter for
// HUB results.
//
// The W-bit words from the CORDIC pipeline are HUB numbers, so the absolute
// value is a conditional bitwise inversion controlled by the MSB (which is
// also the output sign).  Before normalization the word's ILSB is made
// explicit: the W-1 magnitude bits are followed by W-1 extension bits, either
// 1 0 0 ... 0 (biased, UNBIASED=0) or, for UNBIASED=1, the magnitude's LSB
// followed by copies of its inverse (1000... or 0111...), which removes the
// small bias the new ILSB of the result would otherwise add.  The
// normalization module shifts the extended word left until its MSB is one;
// the top M bits are the output significand, the rest is simply dropped
// (truncation rounds to nearest for HUB numbers), so there is no rounding
// adder and no significand overflow.  The exponent is the common exponent plus
// the weight of the magnitude's MSB (INT_GUARD) minus the shift.
//
// An all-zero magnitude (the HUB word closest to zero) is returned as +0, as
// are results whose exponent falls to zero or below; results whose exponent
// reaches the all-ones code saturate to the largest finite value.  These
// exception rules are this design's choice (the paper only states the flush
// to zero on underflow).  Timing: three stages (absolute value / normalize and
// exponent / pack), one pair per clock, vr delayed alongside.  The dataflow
// follows the paper's Fig. 7.
module fp_out_conv_hub
  import givens_pkg::*;
#(
  parameter int unsigned E        = EXP_W_DEF,
  parameter int unsigned M        = SIG_W_DEF,
  parameter int unsigned N        = FIX_W_DEF,
  parameter int unsigned W        = FIX_W_DEF + INT_GUARD,
  parameter bit          UNBIASED = 1'b1
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

  if (W < M + 2) begin : g_bad_width
    $error("fp_out_conv_hub: W must be at least M+2");
  end

  localparam int unsigned MW    = W - 1;             // magnitude width
  localparam int unsigned XW    = 2 * MW;            // magnitude + extension
  localparam int unsigned CW    = $clog2(XW);
  localparam int signed   MSB_W = int'(W) - int'(N);
  localparam int signed   EMAX  = (1 << E) - 1;
  localparam logic [MW-1:0] EXT_HALF = MW'(1) << (MW - 1);   // 1000...0

  // ---------------- stage 1: sign and absolute value by inversion
  logic          s1_sgn [2];
  logic [MW-1:0] s1_mag [2];
  logic [E-1:0]  s1_exp;
  logic          s1_vr;

  always_ff @(posedge clk) begin
    s1_sgn[0] <= xfix_i[W-1];
    s1_sgn[1] <= yfix_i[W-1];
    s1_mag[0] <= MW'(xfix_i[W-1] ? ~xfix_i : xfix_i);
    s1_mag[1] <= MW'(yfix_i[W-1] ? ~yfix_i : yfix_i);
    s1_exp    <= exp_i;
  end

  // ---------------- stage 2: append ILSB, normalize, exponent update
  logic [XW-1:0] ext   [2];
  logic [XW-1:0] nrm   [2];
  logic [CW-1:0] shamt [2];
  logic          unused_zero [2];

  for (genvar c = 0; c < 2; c++) begin : g_norm
    always_comb begin
      if (UNBIASED && !s1_mag[c][0]) ext[c] = {s1_mag[c], EXT_HALF - 1'b1};
      else                           ext[c] = {s1_mag[c], EXT_HALF};
    end
    fp_normalize #(.WIDTH(XW), .CNT_W(CW)) u_norm (
      .value_i(ext[c]),
      .norm_o (nrm[c]),
      .shift_o(shamt[c]),
      .zero_o (unused_zero[c])   // never set: the extension always holds a one
    );
  end

  logic                s2_sgn [2];
  logic [M-1:0]        s2_sig [2];
  logic signed [E+1:0] s2_exp [2];
  logic                s2_zro [2];
  logic                s2_vr;

  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      s2_sgn[c] <= s1_sgn[c];
      s2_sig[c] <= nrm[c][XW-1 -: M];
      s2_exp[c] <= $signed({2'b00, s1_exp}) + (E+2)'(MSB_W) - $signed((E+2)'(shamt[c]));
      s2_zro[c] <= (s1_mag[c] == '0);
    end
  end

  // ---------------- stage 3: exceptions and packing
  logic [E+M-1:0] res [2];

  always_comb begin
    for (int c = 0; c < 2; c++) begin
      if (s2_zro[c] || s2_exp[c] <= 0)
        res[c] = '0;
      else if (s2_exp[c] >= (E+2)'(EMAX))
        res[c] = {s2_sgn[c], E'(EMAX - 1), {(M-1){1'b1}}};
      else
        res[c] = {s2_sgn[c], s2_exp[c][E-1:0], s2_sig[c][M-2:0]};
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
