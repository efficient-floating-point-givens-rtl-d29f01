// tb_fp_out_conv_hub: self-checking test of the HUB output converter with
// biased (UNBIASED=0) and unbiased (UNBIASED=1) extension side by side.
//
// Random W-bit HUB words with the leading one anywhere, all-zero magnitudes,
// and common exponents over the whole range.  Reference, in integer
// arithmetic: the magnitude is a = (w < 0 ? -w-1 : w); with MW = W-1 the
// extended value is G = a * 2^MW + X where X = 2^(MW-1) for the biased rule
// or when a is odd, and 2^(MW-1)-1 for an even a under the unbiased rule.
// The significand is the M bits of G from its leading one down (truncated),
// the exponent is exp_in + (p - MW) - (N-2) for a leading one at bit p;
// a = 0 or an exponent <= 0 gives +0, an exponent >= 255 saturates.
// Outputs are compared three clocks after their inputs.
module tb_fp_out_conv_hub;
  localparam int unsigned E = 8, M = 24, N = 26, W = N + 2;
  localparam int MW = W - 1;
  localparam int NV = 3000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_uflow = 0, n_oflow = 0, n_zero = 0, n_norm = 0, n_even = 0;

  logic [E-1:0] ein;
  logic signed [W-1:0] xw, yw;
  logic vr;
  logic vro [2];
  logic [E+M-1:0] xo [2], yo [2];

  for (genvar u = 0; u < 2; u++) begin : g_dut
    fp_out_conv_hub #(.E(E), .M(M), .N(N), .W(W), .UNBIASED(u)) dut (
      .clk(clk), .rst_n(rst_n), .exp_i(ein), .xfix_i(xw), .yfix_i(yw), .vr_i(vr),
      .x_o(xo[u]), .y_o(yo[u]), .vr_o(vro[u]));
  end

  logic [E+M-1:0] xq [2][NV], yq [2][NV];
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
    if ($urandom_range(0, 9) == 0) m = 0;
    else m = (longint'(1) << p) | (longint'({$urandom, $urandom}) & ((longint'(1) << p) - 1));
    return ($urandom & 1) ? W'(-m - 1) : W'(m);   // HUB negation of m
  endfunction

  function automatic logic [E+M-1:0] ref_conv(input logic signed [W-1:0] w, input int e_in,
                                              input bit unb, input bit count);
    longint a, g, q;
    int p, e;
    bit s;
    s = w[W-1];
    a = s ? -longint'(w) - 1 : longint'(w);
    if (a == 0) begin if (count) n_zero++; return '0; end
    g = a * (longint'(1) << MW);
    if (unb && a % 2 == 0) begin g = g + (longint'(1) << (MW - 1)) - 1; if (count) n_even++; end
    else g = g + (longint'(1) << (MW - 1));
    p = msb(g);
    q = g / (longint'(1) << (p + 1 - M));
    e = e_in + (p - MW) - (N - 2);
    if (e <= 0) begin if (count) n_uflow++; return '0; end
    if (e >= 255) begin if (count) n_oflow++; return {s, E'(254), {(M-1){1'b1}}}; end
    if (count) n_norm++;
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
        for (int u = 0; u < 2; u++) begin
          checks++;
          if (xo[u] != xq[u][k] || yo[u] != yq[u][k] || vro[u] != vrq[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL unb=%0d #%0d got %h %h expected %h %h", u, k, xo[u], yo[u], xq[u][k], yq[u][k]);
          end
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
        for (int u = 0; u < 2; u++) begin
          xq[u][n] = ref_conv(xw, int'(ein), u[0], u == 1);
          yq[u][n] = ref_conv(yw, int'(ein), u[0], u == 1);
        end
      end
    end
    $display("normal=%0d even magnitudes=%0d underflows=%0d overflows=%0d zeros=%0d",
             n_norm, n_even, n_uflow, n_oflow, n_zero);
    if (n_uflow == 0 || n_oflow == 0 || n_zero == 0 || n_even == 0) failures++;
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
