// tb_qrd_workload: QR decomposition of random matrices with one Givens
// rotation unit, measuring the accuracy of the result.
//
// For an n x n matrix A the augmented rows [A | I] are reduced column by
// column: for column j and each row i > j, the pair of rows (j, i) is sent
// through the unit as one vectoring pair (R[j][j], R[i][j]) followed by
// rotation pairs for the remaining 2n-j-1 columns on consecutive clocks.
// The unit's results are read back LATENCY clocks later.  Two steps that are
// outside the rotation unit are done here in the testbench: a pivot row whose
// leading element is negative is negated first (an orthogonal step that keeps
// the vectoring angle inside the CORDIC convergence range), and the CORDIC
// gain K is divided out of every result before it is stored back as a HUB
// single-precision number.  At the end [A | I] has become [R | Q^T], and
// B = Q R is compared with A:
//     SNR = 10 log10( sum a_ij^2 / sum (a_ij - b_ij)^2 ).
// Matrices are 4x4 (rows of e = 8 elements) and 7x7 (e = 14), with entries of
// random sign and magnitude 2^u, u uniform in [-r, r], for r = 1, 5, 10, 20, 30, 40.
// The mean SNR of every (size, r) group must exceed 120 dB and the lower
// triangle of R must have been driven to (near) zero.
module tb_qrd_workload;
  localparam int E = 8, M = 24, ITER = 24;
  localparam int LAT = 2 + ITER + 3;
  localparam int NMAX = 7;
  localparam int MATS = 100;         // matrices per (size, r) group
  localparam real SNR_MIN = 120.0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic vr, vr_o;
  logic [E+M-1:0] x, y, x_o, y_o;

  fp_givens_rotator dut (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x), .y_i(y),
    .vr_o(vr_o), .x_o(x_o), .y_o(y_o));

  real kgain;
  logic [E+M-1:0] mat [NMAX][2*NMAX];   // working rows [R | Q^T], HUB bits
  real a [NMAX][NMAX];

  function automatic real hubval(input logic [E+M-1:0] f);
    real v;
    int  e;
    e = int'(f[E+M-2 -: E]) - 127;
    if (f[E+M-2 -: E] == 0) return 0.0;
    v = (1.0 + (real'(f[M-2:0]) + 0.5) / (2.0 ** (M - 1))) * (2.0 ** e);
    return f[E+M-1] ? -v : v;
  endfunction

  // nearest HUB single-precision number (truncation of the significand)
  function automatic logic [E+M-1:0] tohub(input real v);
    real m;
    int  e;
    bit  s;
    if (v == 0.0) return '0;
    s = (v < 0.0);
    m = s ? -v : v;
    e = 0;
    while (m >= 2.0) begin m = m / 2.0; e++; end
    while (m < 1.0)  begin m = m * 2.0; e--; end
    if (e + 127 <= 0) return '0;
    return {s, E'(e + 127), (M-1)'(longint'($floor((m - 1.0) * (2.0 ** (M - 1)))))};
  endfunction

  // rotate rows j and i from column j on; the unit's gain is divided out
  task automatic rotate_rows(input int n, input int j, input int i);
    int cnt;
    logic [E+M-1:0] rx [2*NMAX], ry [2*NMAX];
    cnt = 2 * n - j;
    if (hubval(mat[j][j]) < 0.0)
      for (int k = 0; k < 2 * n; k++) if (mat[j][k] != '0) mat[j][k][E+M-1] = ~mat[j][k][E+M-1];
    fork
      begin
        for (int k = 0; k < cnt; k++) begin
          @(negedge clk);
          vr = (k == 0);
          x  = mat[j][j + k];
          y  = mat[i][j + k];
        end
        @(negedge clk);
        vr = 1'b0; x = '0; y = '0;
      end
      begin
        @(negedge clk);
        repeat (LAT) @(negedge clk);
        for (int k = 0; k < cnt; k++) begin
          checks++;
          if (vr_o != (k == 0)) begin
            failures++;
            $display("FAIL v/r out of step at element %0d", k);
          end
          rx[k] = x_o;
          ry[k] = y_o;
          if (k < cnt - 1) @(negedge clk);
        end
      end
    join
    for (int k = 0; k < cnt; k++) begin
      mat[j][j + k] = tohub(hubval(rx[k]) / kgain);
      mat[i][j + k] = tohub(hubval(ry[k]) / kgain);
    end
  endtask

  initial begin
    int sizes [2] = '{4, 7};
    int rs [6] = '{1, 5, 10, 20, 30, 40};
    kgain = 1.0;
    for (int it = 0; it < ITER; it++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2 * it));
    vr = 0; x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[si]) begin
      int n;
      n = sizes[si];
      foreach (rs[ri]) begin
        real snr_sum, worst_low;
        snr_sum = 0.0;
        worst_low = 0.0;
        for (int t = 0; t < MATS; t++) begin
          real num, den, b;
          // random A and identity
          for (int r = 0; r < n; r++)
            for (int c = 0; c < 2 * n; c++) begin
              if (c < n) begin
                int u;
                u = $urandom_range(0, 2 * rs[ri]) - rs[ri];
                mat[r][c] = {1'($urandom), E'(127 + u), (M-1)'($urandom)};
                a[r][c] = hubval(mat[r][c]);
              end else begin
                mat[r][c] = (c - n == r) ? {1'b0, E'(127), (M-1)'(0)} : '0;
              end
            end
          // Givens QR
          for (int j = 0; j < n - 1; j++)
            for (int i = j + 1; i < n; i++)
              rotate_rows(n, j, i);
          // B = Q R with Q = (Q^T)^T held in columns n..2n-1
          num = 0.0; den = 0.0;
          for (int r = 0; r < n; r++)
            for (int c = 0; c < n; c++) begin
              b = 0.0;
              for (int k = 0; k < n; k++) b = b + hubval(mat[k][n + r]) * hubval(mat[k][c]);
              num = num + a[r][c] * a[r][c];
              den = den + (a[r][c] - b) * (a[r][c] - b);
              if (r > c) begin
                real rel;
                rel = hubval(mat[r][c]);
                rel = (rel < 0.0 ? -rel : rel) / $sqrt(num + 1e-300);
                if (rel > worst_low) worst_low = rel;
              end
            end
          snr_sum = snr_sum + 10.0 * $log10(num / (den + 1e-300));
        end
        checks++;
        $display("QRD %0dx%0d r=%0d: mean SNR %0.1f dB over %0d matrices, largest |R below diagonal| / ||A|| %e",
                 n, n, rs[ri], snr_sum / MATS, MATS, worst_low);
        if (snr_sum / MATS < SNR_MIN || worst_low > 1e-5) begin
          failures++;
          $display("FAIL accuracy of the %0dx%0d group with r=%0d", n, n, rs[ri]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (MATS * 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
