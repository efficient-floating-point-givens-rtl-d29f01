// tb_fp_in_conv_hub: self-checking test of the HUB input converter in its
// basic form (biased extension, no identity detection) and its full form
// (unbiased extension and identity detection) side by side.
//
// Random single-precision HUB pairs with exponent differences around every
// region of the shifter, exact +-1.0 operands and zeros.  Reference, in
// integer arithmetic: a HUB significand m with sign s becomes
//     w = (s ? -m-1 : m) * 2^P + ext,   P = N-M-1,
// where ext is 2^(P-1) (biased), the operand's fraction LSB pattern
// 2^(P-1) or 2^(P-1)-1 (unbiased), or 0 for a detected 1.0; a zero operand
// gives w = 0.  The aligned operand must be floor(w / 2^d) (truncation),
// zero when d > N.  Outputs are compared two clocks after their inputs.
module tb_fp_in_conv_hub;
  localparam int unsigned E = 8, M = 24, N = 26;
  localparam int P  = N - M - 1;
  localparam int NV = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_xbig = 0, n_ybig = 0, n_force0 = 0, n_zero = 0, n_one = 0;

  logic [E+M-1:0] x, y;
  logic vr;
  logic signed [N-1:0] xf [2], yf [2];
  logic [E-1:0] me [2];
  logic vro [2];

  for (genvar r = 0; r < 2; r++) begin : g_dut
    fp_in_conv_hub #(.E(E), .M(M), .N(N), .UNBIASED(r), .DETECT_I(r)) dut (
      .clk(clk), .rst_n(rst_n), .x_i(x), .y_i(y), .vr_i(vr),
      .xfix_o(xf[r]), .yfix_o(yf[r]), .mexp_o(me[r]), .vr_o(vro[r]));
  end

  longint exq [2][NV], eyq [2][NV];
  int     emq [NV];
  bit     vrq [NV];

  function automatic logic [E+M-1:0] rnd_fp(input int e);
    if ($urandom_range(0, 15) == 0) return {1'(($urandom & 1)), E'(127), (M-1)'(0)};  // +-1.0
    return {1'(($urandom & 1)), E'(e), (M-1)'($urandom)};
  endfunction

  function automatic longint word(input logic [E+M-1:0] f, input bit full);
    longint m, base, ext;
    if (f[E+M-2 -: E] == 0) return 0;
    m    = longint'({1'b1, f[M-2:0]});
    base = f[E+M-1] ? -m - 1 : m;
    if (full && f[E+M-2 -: E] == 127 && f[M-2:0] == 0) ext = 0;
    else if (full) ext = f[0] ? 2 ** (P - 1) : 2 ** (P - 1) - 1;
    else ext = 2 ** (P - 1);
    return base * (2 ** P) + ext;
  endfunction

  function automatic longint align(input longint w, input int d);
    if (d > N) return 0;
    return longint'($floor(real'(w) / (2.0 ** d)));
  endfunction

  initial begin
    int ex, ey, d, k;
    vr = 0; x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NV + 2; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        k = n - 2;
        for (int r = 0; r < 2; r++) begin
          checks++;
          if (longint'(xf[r]) != exq[r][k] || longint'(yf[r]) != eyq[r][k] ||
              int'(me[r]) != emq[k] || vro[r] != vrq[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL full=%0d #%0d got %0d %0d e%0d expected %0d %0d e%0d",
                       r, k, xf[r], yf[r], me[r], exq[r][k], eyq[r][k], emq[k]);
          end
        end
      end
      if (n < NV) begin
        ex = $urandom_range(100, 150);
        case ($urandom_range(0, 4))
          0: d = 0;
          1: d = $urandom_range(1, 8);
          2: d = $urandom_range(9, N - 2);
          3: d = $urandom_range(N - 1, N + 2);
          default: d = $urandom_range(N + 3, 50);
        endcase
        ey = ($urandom & 1) ? ex + d : ex - d;
        x = rnd_fp(ex);
        y = rnd_fp(ey);
        if ($urandom_range(0, 30) == 0) begin x = '0; n_zero++; end
        if ($urandom_range(0, 30) == 0) begin y = '0; n_zero++; end
        if (x[E+M-2:0] == {E'(127), (M-1)'(0)}) n_one++;
        if (y[E+M-2:0] == {E'(127), (M-1)'(0)}) n_one++;
        vr = 1'($urandom);
        vrq[n] = vr;
        ex = int'(x[E+M-2 -: E]);
        ey = int'(y[E+M-2 -: E]);
        if (ex < ey) begin
          n_ybig++;
          emq[n] = ey;
          d = ey - ex;
          if (d > N) n_force0++;
          for (int r = 0; r < 2; r++) begin
            exq[r][n] = align(word(x, r[0]), d);
            eyq[r][n] = word(y, r[0]);
          end
        end else begin
          n_xbig++;
          emq[n] = ex;
          d = ex - ey;
          if (d > N) n_force0++;
          for (int r = 0; r < 2; r++) begin
            exq[r][n] = word(x, r[0]);
            eyq[r][n] = align(word(y, r[0]), d);
          end
        end
      end
    end
    $display("x larger=%0d y larger=%0d forced zero=%0d zero operands=%0d ones=%0d",
             n_xbig, n_ybig, n_force0, n_zero, n_one);
    if (n_xbig == 0 || n_ybig == 0 || n_force0 == 0 || n_zero == 0 || n_one == 0) failures++;
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
