// givens_pkg: constants shared by the floating-point Givens rotation unit.
//
// The defaults describe the configuration the design is built around: IEEE
// single-precision-like operands (8-bit exponent, 24-bit significand counting
// the hidden leading one), an internal fixed-point significand of N = 26 bits
// and N-2 = 24 CORDIC microrotations, which is the HUB rotator configuration
// the paper compares against a 32-bit fixed-point rotator.  Inside the CORDIC
// pipeline the N-bit significands get two extra integer bits (INT_GUARD) so
// that the CORDIC gain and the vector length cannot overflow.  The converter
// pipeline depths (two input stages, three output stages) are also the paper's.
package givens_pkg;

  localparam int unsigned EXP_W_DEF   = 8;   // exponent field width e
  localparam int unsigned SIG_W_DEF   = 24;  // significand width m, hidden one included
  localparam int unsigned FIX_W_DEF   = 26;  // internal significand width N
  localparam int unsigned ITER_DEF    = 24;  // CORDIC microrotations (N-2 for HUB)
  localparam int unsigned INT_GUARD   = 2;   // extra integer bits in the CORDIC pipeline
  localparam int unsigned IN_STAGES   = 2;   // pipeline stages of the input converter
  localparam int unsigned OUT_STAGES  = 3;   // pipeline stages of the output converter

  // Value of the v/r control line.
  typedef enum logic {
    ROTATE = 1'b0,  // rotate the pair by the stored microrotation directions
    VECTOR = 1'b1   // compute a new angle from this pair (drive Y to zero)
  } vr_e;

endpackage
