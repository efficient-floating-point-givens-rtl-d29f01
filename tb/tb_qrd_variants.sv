// tb_qrd_variants: accuracy of 4x4 QR decompositions for the build options
// of the rotation unit, all at single precision and N = 26:
//   0 HUB basic      (biased extension, no identity detection), 24 iterations
//   1 HUB unbiased   (unbiased extension only),                 24 iterations
//   2 HUB detect-I   (identity detection only),                 24 iterations
//   3 HUB full       (both; the default build),                 24 iterations
//   4 IEEE truncate  (truncation at the input alignment),       23 iterations
//   5 IEEE round     (rounding at the input alignment),         23 iterations
// (N-2 microrotations for HUB, N-3 for the conventional builds.)
//
// The same random double-precision matrices A, entries of random sign and
// magnitude 2^u with u uniform in [-r, r] for r = 1, 5, 10, 20, are rounded
// into each unit's input format: HUB numbers by truncating the significand,
// conventional ones by rounding it to nearest.  Each unit reduces its own
// [A | I] with the schedule of the single-unit QR test (pivot row negated when
// its leading element is negative, gain K divided out in the testbench, the
// results stored back in the unit's format), all six in lock step.  For each
// variant the SNR of Q R against the original A,
//     SNR = 10 log10( sum a_ij^2 / sum (a_ij - b_ij)^2 ),
// is averaged over all matrices and all r and printed; every variant must
// exceed 120 dB, and every unit's v/r output must stay in step with its rows.
module tb_qrd_variants;
  localparam int E = 8, M = 24, N = 26;
  localparam int NV = 6;
  localparam int NMAT = 4;           // matrix size
  localparam int MATS = 250;         // matrices per r
  localparam real SNR_MIN = 120.0;
  localparam bit IS_HUB [NV] = '{1'b1, 1'b1, 1'b1, 1'b1, 1'b0, 1'b0};
  localparam int ITV    [NV] = '{24, 24, 24, 24, 23, 23};
  localparam string NAME [NV] = '{"HUB basic", "HUB unbiased", "HUB detect-I",
                                  "HUB full", "IEEE truncate", "IEEE round"};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic           vr;
  logic [E+M-1:0] x [NV], y [NV];
  logic           vr_o [NV];
  logic [E+M-1:0] x_o [NV], y_o [NV];

  fp_givens_rotator #(.HUB(1'b1), .N(N), .ITER(24), .UNBIASED(1'b0), .DETECT_I(1'b0)) u_hub_basic (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[0]), .y_i(y[0]), .vr_o(vr_o[0]), .x_o(x_o[0]), .y_o(y_o[0]));
  fp_givens_rotator #(.HUB(1'b1), .N(N), .ITER(24), .UNBIASED(1'b1), .DETECT_I(1'b0)) u_hub_unbias (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[1]), .y_i(y[1]), .vr_o(vr_o[1]), .x_o(x_o[1]), .y_o(y_o[1]));
  fp_givens_rotator #(.HUB(1'b1), .N(N), .ITER(24), .UNBIASED(1'b0), .DETECT_I(1'b1)) u_hub_deti (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[2]), .y_i(y[2]), .vr_o(vr_o[2]), .x_o(x_o[2]), .y_o(y_o[2]));
  fp_givens_rotator #(.HUB(1'b1), .N(N), .ITER(24), .UNBIASED(1'b1), .DETECT_I(1'b1)) u_hub_full (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[3]), .y_i(y[3]), .vr_o(vr_o[3]), .x_o(x_o[3]), .y_o(y_o[3]));
  fp_givens_rotator #(.HUB(1'b0), .N(N), .ITER(23), .IN_ROUND(1'b0)) u_ieee_trunc (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[4]), .y_i(y[4]), .vr_o(vr_o[4]), .x_o(x_o[4]), .y_o(y_o[4]));
  fp_givens_rotator #(.HUB(1'b0), .N(N), .ITER(23), .IN_ROUND(1'b1)) u_ieee_round (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x[5]), .y_i(y[5]), .vr_o(vr_o[5]), .x_o(x_o[5]), .y_o(y_o[5]));

  real kg [NV];
  logic [E+M-1:0] mat [NV][NMAT][2*NMAT];   // working rows [R | Q^T] per variant
  real a [NMAT][NMAT];                      // original matrix

  // value of a word: HUB words carry an implicit half LSB
  function automatic real val(input int v, input logic [E+M-1:0] f);
    real m;
    int  e;
    if (f[E+M-2 -: E] == 0) return 0.0;
    e = int'(f[E+M-2 -: E]) - 127;
    m = real'(f[M-2:0]) + (IS_HUB[v] ? 0.5 : 0.0);
    m = (1.0 + m / (2.0 ** (M - 1))) * (2.0 ** e);
    return f[E+M-1] ? -m : m;
  endfunction

  // nearest number of the variant's format: truncation for HUB, rounding to
  // nearest (ties away, which random data never meet) for the conventional one
  function automatic logic [E+M-1:0] conv(input int v, input real r);
    real m, fr;
    int  e;
    bit  s;
    longint q;
    if (r == 0.0) return '0;
    s = (r < 0.0);
    m = s ? -r : r;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    fr = (m - 1.0) * (2.0 ** (M - 1));
    q = IS_HUB[v] ? longint'($floor(fr)) : longint'($floor(fr + 0.5));
    if (q == (longint'(1) << (M - 1))) begin q = 0; e++; end
    if (e + 127 <= 0) return '0;
    return {s, E'(e + 127), (M-1)'(q)};
  endfunction

  // rotate rows j and i from column j on, in all variants at once
  task automatic rotate_rows(input int j, input int i);
    int cnt;
    localparam int LATMAX = 2 + 24 + 3;
    logic [E+M-1:0] rx [NV][2*NMAT], ry [NV][2*NMAT];
    cnt = 2 * NMAT - j;
    for (int v = 0; v < NV; v++)
      if (val(v, mat[v][j][j]) < 0.0)
        for (int k = 0; k < 2 * NMAT; k++)
          if (mat[v][j][k] != '0) mat[v][j][k][E+M-1] = ~mat[v][j][k][E+M-1];
    fork
      begin
        for (int k = 0; k < cnt; k++) begin
          @(negedge clk);
          vr = (k == 0);
          for (int v = 0; v < NV; v++) begin
            x[v] = mat[v][j][j + k];
            y[v] = mat[v][i][j + k];
          end
        end
        @(negedge clk);
        vr = 1'b0;
        for (int v = 0; v < NV; v++) begin x[v] = '0; y[v] = '0; end
      end
      begin
        // outputs of the 29-clock HUB units and the 28-clock conventional ones
        @(negedge clk);
        for (int c = 1; c <= LATMAX + cnt; c++) begin
          @(negedge clk);
          for (int v = 0; v < NV; v++) begin
            int k;
            k = c - (2 + ITV[v] + 3);
            if (k >= 0 && k < cnt) begin
              checks++;
              if (vr_o[v] != (k == 0)) begin
                failures++;
                $display("FAIL %s: v/r out of step at element %0d", NAME[v], k);
              end
              rx[v][k] = x_o[v];
              ry[v][k] = y_o[v];
            end
          end
        end
      end
    join
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < cnt; k++) begin
        mat[v][j][j + k] = conv(v, val(v, rx[v][k]) / kg[v]);
        mat[v][i][j + k] = conv(v, val(v, ry[v][k]) / kg[v]);
      end
  endtask

  initial begin
    int  rs [4];
    real snr_sum [NV];
    rs = '{1, 5, 10, 20};
    for (int v = 0; v < NV; v++) begin
      kg[v] = 1.0;
      for (int it = 0; it < ITV[v]; it++) kg[v] = kg[v] * $sqrt(1.0 + 2.0 ** (-2 * it));
      snr_sum[v] = 0.0;
      x[v] = '0; y[v] = '0;
    end
    vr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (rs[ri])
      for (int t = 0; t < MATS; t++) begin
        // random A in double precision, then [A | I] in every format
        for (int r = 0; r < NMAT; r++)
          for (int c = 0; c < NMAT; c++) begin
            int u;
            u = $urandom_range(0, 2 * rs[ri]) - rs[ri];
            a[r][c] = (1.0 + real'($urandom_range(0, 32'h7fffffff)) / 2147483648.0) * (2.0 ** u);
            if (($urandom & 1) != 0) a[r][c] = -a[r][c];
          end
        for (int v = 0; v < NV; v++)
          for (int r = 0; r < NMAT; r++)
            for (int c = 0; c < 2 * NMAT; c++)
              mat[v][r][c] = (c < NMAT) ? conv(v, a[r][c]) :
                             (c - NMAT == r) ? {1'b0, E'(127), (M-1)'(0)} : '0;
        for (int j = 0; j < NMAT - 1; j++)
          for (int i = j + 1; i < NMAT; i++)
            rotate_rows(j, i);
        // B = Q R, Q = (Q^T)^T from columns NMAT..2 NMAT-1
        for (int v = 0; v < NV; v++) begin
          real num, den, b;
          num = 0.0; den = 0.0;
          for (int r = 0; r < NMAT; r++)
            for (int c = 0; c < NMAT; c++) begin
              b = 0.0;
              for (int k = 0; k < NMAT; k++)
                b = b + val(v, mat[v][k][NMAT + r]) * val(v, mat[v][k][c]);
              num = num + a[r][c] * a[r][c];
              den = den + (a[r][c] - b) * (a[r][c] - b);
            end
          snr_sum[v] = snr_sum[v] + 10.0 * $log10(num / (den + 1e-300));
        end
      end
    for (int v = 0; v < NV; v++) begin
      real mean;
      mean = snr_sum[v] / (4 * MATS);
      checks++;
      $display("%-14s mean SNR %0.1f dB over %0d 4x4 matrices (r = 1, 5, 10, 20)", NAME[v], mean, 4 * MATS);
      if (mean < SNR_MIN) begin
        failures++;
        $display("FAIL %s below %0.0f dB", NAME[v], SNR_MIN);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4 * MATS * 6 * 50 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
