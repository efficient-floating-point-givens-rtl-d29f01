// fp_in_conv_hub: floating-point to block-fixed-point input converter for
// Half-Unit-Biased (HUB) operands.
//
// A HUB number carries an implicit least significant bit (ILSB) equal to one,
// so its negation is a plain bitwise inversion and rounding to nearest is
// plain truncation.  This converter therefore replaces the two's complement
// units of the conventional converter by conditional inverters and has no
// rounding logic: truncating the aligned significand already rounds it.
//
// Each (M+1)-bit signed significand (sign, hidden one, fraction; bitwise
// inverted when the sign is set) is widened to N bits by N-M-1 extension bits
// that take the place of the old ILSB and the bits below it:
//   * biased   (UNBIASED=0): 1 0 0 ... 0 (the old ILSB made explicit);
//   * unbiased (UNBIASED=1): LSB, ~LSB, ~LSB, ... where LSB is the operand's
//     explicit fraction LSB, so the implicit rounding goes up or down at random;
//   * identity detection (DETECT_I=1): an operand equal to +-1.0 (biased
//     exponent 0111...1 and zero fraction) gets all-zero extension bits so the
//     ones of an identity matrix are not disturbed by the ILSB.
// A zero exponent field marks a zero operand; its word is forced to all zeros.
// Exponent comparison, selection and alignment are as in the conventional
// converter (two parallel subtractions, shifter forced to zero beyond N).
//
// Interface and timing: one X/Y pair plus v/r per clock, results two cycles
// later (stage 1: unpack/invert/extend and exponent differences; stage 2:
// align).  The paper gives the dataflow (its Fig. 5), the extension rules and
// the detection condition; taking the unbiased LSB from the operand before
// inversion follows the label in that figure, and the zero handling and reset
// of v/r only are this design's choices.
module fp_in_conv_hub
  import givens_pkg::*;
#(
  parameter int unsigned E        = EXP_W_DEF,
  parameter int unsigned M        = SIG_W_DEF,
  parameter int unsigned N        = FIX_W_DEF,
  parameter bit          UNBIASED = 1'b1,   // unbiased extension of the significand
  parameter bit          DETECT_I = 1'b1    // identity-matrix 1.0 detection
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [E+M-1:0]      x_i,
  input  logic [E+M-1:0]      y_i,
  input  logic                vr_i,
  output logic signed [N-1:0] xfix_o,   // HUB words, ILSB implicit
  output logic signed [N-1:0] yfix_o,
  output logic [E-1:0]        mexp_o,
  output logic                vr_o
);

  if (N <= M) begin : g_bad_width
    $error("fp_in_conv_hub: N must exceed M");
  end

  localparam int unsigned PAD = N - M - 1;
  localparam logic [E-1:0] ONE_EXP = {1'b0, {(E-1){1'b1}}};

  localparam logic [PAD-1:0] EXT_HALF = PAD'(1) << (PAD - 1);  // 1000...0

  // One operand: unpack, invert, extend.
  function automatic logic [N-1:0] widen(input logic [E+M-1:0] f);
    logic [E-1:0]   ex;
    logic [M-1:0]   mag;
    logic [M:0]     sm;
    logic [PAD-1:0] ext;
    ex  = f[E+M-2 -: E];
    mag = {1'b1, f[M-2:0]};
    sm  = f[E+M-1] ? ~{1'b0, mag} : {1'b0, mag};
    if (DETECT_I && ex == ONE_EXP && f[M-2:0] == '0)
      ext = '0;
    else if (UNBIASED)
      ext = f[0] ? EXT_HALF : EXT_HALF - 1'b1;    // 1000... or 0111...
    else
      ext = EXT_HALF;
    return (ex == '0) ? '0 : {sm, ext};
  endfunction

  logic [E-1:0]      ex, ey;
  logic signed [E:0] dxy;
  logic        [E-1:0] dyx;       // only read when ExpY > ExpX, so E bits suffice

  always_comb begin
    ex  = x_i[E+M-2 -: E];
    ey  = y_i[E+M-2 -: E];
    dxy = $signed({1'b0, ex}) - $signed({1'b0, ey});
    dyx = ey - ex;
  end

  logic signed [N-1:0] s1_x, s1_y;
  logic [E-1:0]        s1_ex, s1_ey;
  logic signed [E:0]   s1_dxy;
  logic        [E-1:0]   s1_dyx;
  logic                s1_vr;

  always_ff @(posedge clk) begin
    s1_x   <= widen(x_i);
    s1_y   <= widen(y_i);
    s1_ex  <= ex;
    s1_ey  <= ey;
    s1_dxy <= dxy;
    s1_dyx <= dyx;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_vr <= 1'b0;
    else        s1_vr <= vr_i;
  end

  // Stage 2: select and align; truncation is round-to-nearest for HUB words.
  logic                x_lt_y;
  logic [E-1:0]        shamt;
  logic signed [N-1:0] sh_in, sh_out;

  always_comb begin
    x_lt_y = s1_dxy[E];
    shamt   = x_lt_y ? s1_dyx : s1_dxy[E-1:0];
    sh_in  = x_lt_y ? s1_x : s1_y;
    if (shamt > E'(N)) sh_out = '0;
    else               sh_out = sh_in >>> shamt;
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
