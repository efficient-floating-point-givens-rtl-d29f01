// cordic_stage: one pipelined microrotation of the fixed-point Givens rotator.
//
// Stage `SHIFT` computes
//     X' = X + s * (Y >>> SHIFT),   Y' = Y - s * (X >>> SHIFT),
// with s = +1 when the microrotation direction bit is 0 and s = -1 when it
// is 1.  There is no Z (angle) datapath.  On a vectoring cycle (vr_i = 1) the
// direction is the sign bit of the incoming Y, which drives Y towards zero,
// and that bit is loaded into the stage's sigma register.  On rotation cycles
// (vr_i = 0) the stored sigma is used, so every row element that follows a
// vectoring pair is rotated by the same angle one stage at a time.  The
// shift is a fixed wiring, the two add/sub units share the direction bit.
//
// HUB=1 builds the add/sub of the HUB variant: the shifted operand is formed
// on W+1 bits with the ILSB (a 1) appended before shifting, a conditional
// inverter negates it (bitwise inversion is HUB negation), its upper W bits
// feed the W-bit adder and its LSB becomes the adder's carry-in.  Truncating
// the (W+1)-bit sum to W bits is HUB round-to-nearest.  HUB=0 is the
// conventional two's complement add/sub with carry-in = subtract.
//
// Timing: registered outputs, one stage per clock, one X/Y pair per clock.
// The sigma register is reset to 0; the paper's figure shows it loaded under
// control of v/r (the load is this register's only enable).  The structure
// (sigma register, 0/1 mux on v/r, wired shift, add/sub) follows the paper's
// Fig. 3 and Fig. 6; placing the pipeline register at the stage output rather
// than its input is an equivalent choice made here.
module cordic_stage
  import givens_pkg::*;
#(
  parameter int unsigned W     = 28,     // datapath width (N plus two integer bits)
  parameter int unsigned SHIFT = 0,      // microrotation index = right shift
  parameter bit          HUB   = 1'b1    // 1: HUB add/sub, 0: two's complement
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

  logic sigma_q;   // stored direction of this microrotation
  logic dir;       // 0: X += Y>>i, Y -= X>>i ; 1: X -= Y>>i, Y += X>>i

  assign dir = (vr_e'(vr_i) == VECTOR) ? y_i[W-1] : sigma_q;

  // a +/- (b >>> SHIFT); sub selects subtraction.
  function automatic logic signed [W-1:0] addsub(input logic signed [W-1:0] a,
                                                 input logic signed [W-1:0] b,
                                                 input logic sub);
    logic signed [W:0]   bh;
    logic [W:0]          bi;
    logic signed [W-1:0] bs;
    if (HUB) begin
      bh = $signed({b, 1'b1}) >>> SHIFT;        // ILSB made explicit, shifted
      bi = sub ? ~bh : bh;                       // HUB negation
      return a + $signed(bi[W:1]) + W'(bi[0]);   // LSB into the carry-in
    end else begin
      bs = b >>> SHIFT;
      return a + (sub ? ~bs : bs) + W'(sub);
    end
  endfunction

  always_ff @(posedge clk) begin
    x_o <= addsub(x_i, y_i, dir);
    y_o <= addsub(y_i, x_i, ~dir);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sigma_q <= 1'b0;
      vr_o    <= 1'b0;
    end else begin
      if (vr_i) sigma_q <= y_i[W-1];
      vr_o <= vr_i;
    end
  end

endmodule
