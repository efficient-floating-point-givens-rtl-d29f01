// tb_fp_in_conv_ieee: self-checking test of the conventional input converter,
// truncating (ROUND=0) and rounding (ROUND=1) versions side by side.
//
// Random single-precision pairs with exponent differences chosen to hit equal
// exponents, small shifts, shifts around N (where the shifter must force zero)
// and zero operands.  The reference works on integers and reals: the
// significand scaled to the common exponent is v * 2^(N-M-1) / 2^d; the
// truncating converter must return its floor, the rounding one the nearest
// integer with ties to even, both zero when d > N.  Outputs are compared two
// clocks after their inputs (the converter's latency).
module tb_fp_in_conv_ieee;
  localparam int unsigned E = 8, M = 24, N = 26;
  localparam int NV = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_xbig = 0, n_ybig = 0, n_force0 = 0, n_zero = 0;

  logic [E+M-1:0] x, y;
  logic vr;
  logic signed [N-1:0] xf [2], yf [2];
  logic [E-1:0] me [2];
  logic vro [2];

  for (genvar r = 0; r < 2; r++) begin : g_dut
    fp_in_conv_ieee #(.E(E), .M(M), .N(N), .ROUND(r)) dut (
      .clk(clk), .rst_n(rst_n), .x_i(x), .y_i(y), .vr_i(vr),
      .xfix_o(xf[r]), .yfix_o(yf[r]), .mexp_o(me[r]), .vr_o(vro[r]));
  end

  longint exq [2][NV], eyq [2][NV];
  int     emq [NV];
  bit     vrq [NV];

  function automatic logic [E+M-1:0] rnd_fp(input int e);
    return {1'(($urandom & 1)), E'(e), (M-1)'($urandom)};
  endfunction

  function automatic longint sval(input logic [E+M-1:0] f);  // signed significand
    longint m;
    m = (f[E+M-2 -: E] == 0) ? 0 : longint'({1'b1, f[M-2:0]});
    return f[E+M-1] ? -m : m;
  endfunction

  function automatic longint align(input longint v, input int d, input bit rnd);
    real t, q;
    if (d > N) return 0;
    t = real'(v) * (2.0 ** (N - M - 1)) / (2.0 ** d);
    q = $floor(t);
    if (rnd && ((t - q > 0.5) || (t - q == 0.5 && longint'(q) % 2 != 0))) q = q + 1.0;
    return longint'(q);
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
              $display("FAIL round=%0d #%0d got %0d %0d e%0d expected %0d %0d e%0d",
                       r, k, xf[r], yf[r], me[r], exq[r][k], eyq[r][k], emq[k]);
          end
        end
      end
      if (n < NV) begin
        ex = $urandom_range(60, 190);
        case ($urandom_range(0, 5))
          0: d = 0;
          1: d = $urandom_range(1, 8);
          2: d = $urandom_range(9, N - 2);
          3: d = $urandom_range(N - 1, N + 2);
          4: d = $urandom_range(N + 3, 50);
          default: d = $urandom_range(0, 30);
        endcase
        ey = ($urandom & 1) ? ex + d : ex - d;
        x = rnd_fp(ex);
        y = rnd_fp(ey);
        if ($urandom_range(0, 30) == 0) begin x = '0; n_zero++; end
        if ($urandom_range(0, 30) == 0) begin y = '0; n_zero++; end
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
            exq[r][n] = align(sval(x), d, r[0]);
            eyq[r][n] = sval(y) * (2 ** (N - M - 1));
          end
        end else begin
          n_xbig++;
          emq[n] = ex;
          d = ex - ey;
          if (d > N) n_force0++;
          for (int r = 0; r < 2; r++) begin
            exq[r][n] = sval(x) * (2 ** (N - M - 1));
            eyq[r][n] = align(sval(y), d, r[0]);
          end
        end
      end
    end
    $display("x larger=%0d y larger=%0d forced zero=%0d zero operands=%0d", n_xbig, n_ybig, n_force0, n_zero);
    if (n_xbig == 0 || n_ybig == 0 || n_force0 == 0 || n_zero == 0) failures++;
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
