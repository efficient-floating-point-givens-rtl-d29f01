// fp_in_conv_ieee: floating-point to block-fixed-point input converter for
// conventional (IEEE-754-like) operands.
//
// The two operands X and Y are split into sign, exponent and significand.
// Each significand (hidden one restored, or zero when the exponent field is
// zero) is turned into a two's complement number with a sign bit in front and
// zero padding behind, giving an N-bit word with one sign bit, one integer bit
// and N-2 fraction bits.  Both exponent differences, ExpX-ExpY and ExpY-ExpX,
// are computed in parallel; the sign of the first picks the common exponent
// mExp (the larger one) and the operand to be aligned, and the non-negative
// difference is the right-shift distance.  The shifter forces its output to
// zero when the distance exceeds N.  With ROUND=1 the shifted significand is
// rounded to nearest, ties to even, from a guard bit and a sticky bit; with
// ROUND=0 the discarded bits are simply dropped (the variant the paper uses in
// its implementation comparison, hence the default).
//
// Interface: one X/Y pair and the v/r control bit are accepted every clock;
// xfix_o, yfix_o, mexp_o and vr_o appear two cycles later.  Stage 1 holds the
// unpacked, sign-converted significands and both exponent differences; stage 2
// the aligned result.
//
// Follows the paper: dataflow of Fig. 2, the two parallel subtractors, the
// force-to-zero shifter, optional rounding, two pipeline stages.  Own choices:
// a zero exponent field means the operand is zero (subnormals, infinities and
// NaNs are not supported, as in the paper); with equal exponents Y is the
// operand routed through the shifter (by zero places); only v/r is reset.
module fp_in_conv_ieee
  import givens_pkg::*;
#(
  parameter int unsigned E     = EXP_W_DEF,  // exponent width
  parameter int unsigned M     = SIG_W_DEF,  // significand width, hidden one included
  parameter int unsigned N     = FIX_W_DEF,  // fixed-point significand width
  parameter bit          ROUND = 1'b0        // 1: round to nearest even, 0: truncate
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [E+M-1:0]      x_i,     // {sign, exponent, fraction}
  input  logic [E+M-1:0]      y_i,
  input  logic                vr_i,
  output logic signed [N-1:0] xfix_o,
  output logic signed [N-1:0] yfix_o,
  output logic [E-1:0]        mexp_o,
  output logic                vr_o
);

  if (N <= M) begin : g_bad_width
    $error("fp_in_conv_ieee: N must exceed M");
  end

  localparam int unsigned PAD = N - M - 1;

  // ---------------- stage 1: unpack, two's complement, exponent subtraction
  logic [E-1:0]        ex, ey;
  logic [M-1:0]        mx, my;
  logic signed [M:0]   tx, ty;
  logic signed [E:0]   dxy;
  logic        [E-1:0]   dyx;       // only read when ExpY > ExpX, so E bits suffice

  always_comb begin
    ex  = x_i[E+M-2 -: E];
    ey  = y_i[E+M-2 -: E];
    mx  = (ex == '0) ? '0 : {1'b1, x_i[M-2:0]};
    my  = (ey == '0) ? '0 : {1'b1, y_i[M-2:0]};
    tx  = x_i[E+M-1] ? -$signed({1'b0, mx}) : $signed({1'b0, mx});
    ty  = y_i[E+M-1] ? -$signed({1'b0, my}) : $signed({1'b0, my});
    dxy = $signed({1'b0, ex}) - $signed({1'b0, ey});
    dyx = ey - ex;
  end

  logic signed [N-1:0] s1_x, s1_y;
  logic [E-1:0]        s1_ex, s1_ey;
  logic signed [E:0]   s1_dxy;
  logic        [E-1:0]   s1_dyx;
  logic                s1_vr;

  always_ff @(posedge clk) begin
    s1_x   <= {tx, {PAD{1'b0}}};
    s1_y   <= {ty, {PAD{1'b0}}};
    s1_ex  <= ex;
    s1_ey  <= ey;
    s1_dxy <= dxy;
    s1_dyx <= dyx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_vr <= 1'b0;
    else        s1_vr <= vr_i;
  end

  // ---------------- stage 2: select, align, round
  logic                x_lt_y;     // ExpX < ExpY: X is the one to align
  logic [E-1:0]        shamt;
  logic signed [N-1:0] sh_in;
  logic signed [2*N-1:0] sh_full;
  logic signed [N-1:0] sh_out;
  logic                guard, sticky, up;

  always_comb begin
    x_lt_y  = s1_dxy[E];
    shamt    = x_lt_y ? s1_dyx : s1_dxy[E-1:0];
    sh_in   = x_lt_y ? s1_x : s1_y;
    sh_full = $signed({sh_in, {N{1'b0}}}) >>> shamt;
    if (shamt > E'(N)) begin
      sh_out = '0;
      guard  = 1'b0;
      sticky = 1'b0;
    end else begin
      sh_out = sh_full[2*N-1:N];
      guard  = sh_full[N-1];
      sticky = |sh_full[N-2:0];
    end
    up = ROUND & guard & (sticky | sh_out[0]);
    sh_out = sh_out + N'(up);
  end

  always_ff @(posedge clk) begin
    mexp_o <= x_lt_y ? s1_ey : s1_ex;
    xfix_o <= x_lt_y ? sh_out : s1_x;
    yfix_o <= x_lt_y ? s1_y : sh_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vr_o <= 1'b0;
    else        vr_o <= s1_vr;
  end

endmodule
