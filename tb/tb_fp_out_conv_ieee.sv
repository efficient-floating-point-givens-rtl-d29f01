// tb_fp_out_conv_ieee: self-checking test of the conventional output
// converter.
//
// Random W-bit two's complement words whose leading one falls anywhere in the
// word (plus runs of ones that make the rounding carry out of the
// significand, and zeros), with common exponents spread over the whole range
// so that underflow and overflow occur.  The reference works on integers:
// find the leading one at bit p of |w|, keep M bits from there, round to
// nearest-even on the dropped bits, renormalize on a carry, exponent =
// exp_in + p - (N-2); flush to zero when the exponent is <= 0, saturate to
// the largest finite value when it reaches 255.  Outputs are compared three
// clocks after their inputs.
module tb_fp_out_conv_ieee;
  localparam int unsigned E = 8, M = 24, N = 26, W = N + 2;
  localparam int NV = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_carry = 0, n_uflow = 0, n_oflow = 0, n_zero = 0, n_norm = 0;

  logic [E-1:0] ein;
  logic signed [W-1:0] xw, yw;
  logic vr, vro;
  logic [E+M-1:0] xo, yo;

  fp_out_conv_ieee #(.E(E), .M(M), .N(N), .W(W)) dut (
    .clk(clk), .rst_n(rst_n), .exp_i(ein), .xfix_i(xw), .yfix_i(yw), .vr_i(vr),
    .x_o(xo), .y_o(yo), .vr_o(vro));

  logic [E+M-1:0] xq [NV], yq [NV];
  bit vrq [NV];

  function automatic int msb(input longint v);
    int p = -1;
    while (v != 0) begin v = v / 2; p++; end
    return p;
  endfunction

  function automatic logic signed [W-1:0] rnd_word();
    int p;
    longint m;
    p = $urandom_range(0, W - 3);
    case ($urandom_range(0, 9))
      0: m = 0;
      1: m = (longint'(1) << (p + 1)) - 1;                  // all ones: rounding carry
      default: m = (longint'(1) << p) | (longint'({$urandom, $urandom}) & ((longint'(1) << p) - 1));
    endcase
    return ($urandom & 1) ? W'(-m) : W'(m);
  endfunction

  function automatic logic [E+M-1:0] ref_conv(input logic signed [W-1:0] w, input int e_in);
    longint mag, q, rem, half;
    int p, sh, e;
    bit s;
    s   = w[W-1];
    mag = s ? -longint'(w) : longint'(w);
    if (mag == 0) begin n_zero++; return '0; end
    p = msb(mag);
    if (p + 1 > M) begin
      sh   = p + 1 - M;
      q    = mag / (longint'(1) << sh);
      rem  = mag - q * (longint'(1) << sh);
      half = longint'(1) << (sh - 1);
      if (rem > half || (rem == half && q % 2 == 1)) q++;
      if (q == (longint'(1) << M)) begin q = q / 2; p++; n_carry++; end
    end else begin
      q = mag * (longint'(1) << (M - 1 - p));
    end
    e = e_in + p - (N - 2);
    if (e <= 0) begin n_uflow++; return '0; end
    if (e >= 255) begin n_oflow++; return {s, E'(254), {(M-1){1'b1}}}; end
    n_norm++;
    return {s, E'(e), q[M-2:0]};
  endfunction

  initial begin
    int k;
    vr = 0; xw = '0; yw = '0; ein = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NV + 3; n++) begin
      @(negedge clk);
      if (n >= 3) begin
        k = n - 3;
        checks++;
        if (xo != xq[k] || yo != yq[k] || vro != vrq[k]) begin
          failures++;
          if (failures < 10)
            $display("FAIL #%0d got %h %h expected %h %h", k, xo, yo, xq[k], yq[k]);
        end
      end
      if (n < NV) begin
        case ($urandom_range(0, 5))
          0: ein = E'($urandom_range(1, 30));
          1: ein = E'($urandom_range(240, 254));
          default: ein = E'($urandom_range(1, 254));
        endcase
        xw = rnd_word();
        yw = rnd_word();
        vr = 1'($urandom);
        vrq[n] = vr;
        xq[n] = ref_conv(xw, int'(ein));
        yq[n] = ref_conv(yw, int'(ein));
      end
    end
    $display("normal=%0d rounding carries=%0d underflows=%0d overflows=%0d zeros=%0d",
             n_norm, n_carry, n_uflow, n_oflow, n_zero);
    if (n_carry == 0 || n_uflow == 0 || n_oflow == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NV + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
