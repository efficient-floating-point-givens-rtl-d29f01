// tb_fp_givens_rotator_formats: end-to-end test of the floating-point Givens
// rotation unit built for the two other precisions it is sized for, both in
// the HUB form with N-2 microrotations:
//   half precision:   E=5,  M=11, N=13, ITER=11 (latency 2+11+3 = 16)
//   double precision: E=11, M=53, N=58, ITER=55 (latency 2+55+3 = 60)
// Both units get their own gap-free stream of row pairs of e = 8 elements
// (one vectoring pair, then seven rotation pairs).  Rows are general random
// rows with spread exponents, rows carrying identity-matrix elements, rows of
// tiny numbers (results underflow) and rows of huge numbers (results
// saturate).  The reference is double-precision math on the HUB input values
// (scaled by 2^-16 for the huge rows, so that it stays finite),
// as in the single-precision end-to-end test: the first pair's angle
// atan2(y, x), results K * (x cos + y sin, -x sin + y cos), expected exactly
// LATENCY clocks after the input and within 2^-(M-5) of the pair's size.
// Underflow, saturation, vectoring and rotation are counted per format and
// a format in which one never happened is a failure.
module tb_fp_givens_rotator_formats;
  localparam int NF = 2;
  localparam int EF   [NF] = '{5, 11};
  localparam int MF   [NF] = '{11, 53};
  localparam int NFX  [NF] = '{13, 58};
  localparam int ITF  [NF] = '{11, 55};
  localparam int ROWS = 120, ELEMS = 8;
  localparam int NP = ROWS * ELEMS;
  localparam int LATMAX = 2 + 55 + 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            vr   [NF];
  logic            vr_o [NF];
  logic [63:0]     x [NF], y [NF], x_o [NF], y_o [NF];   // words right-aligned

  logic [15:0] hx_o, hy_o;
  logic [63:0] dx_o, dy_o;

  fp_givens_rotator #(.HUB(1'b1), .E(5), .M(11), .N(13), .ITER(11)) dut_half (
    .clk(clk), .rst_n(rst_n), .vr_i(vr[0]), .x_i(x[0][15:0]), .y_i(y[0][15:0]),
    .vr_o(vr_o[0]), .x_o(hx_o), .y_o(hy_o));

  fp_givens_rotator #(.HUB(1'b1), .E(11), .M(53), .N(58), .ITER(55)) dut_double (
    .clk(clk), .rst_n(rst_n), .vr_i(vr[1]), .x_i(x[1]), .y_i(y[1]),
    .vr_o(vr_o[1]), .x_o(dx_o), .y_o(dy_o));

  assign x_o[0] = {48'd0, hx_o};
  assign y_o[0] = {48'd0, hy_o};
  assign x_o[1] = dx_o;
  assign y_o[1] = dy_o;

  int n_vec [NF], n_rot [NF], n_uflow [NF], n_sat [NF], n_one [NF];

  real exq [NF][NP], eyq [NF][NP], szq [NF][NP];
  bit  vrq [NF][NP];
  int  scq [NF][NP];
  real kg  [NF];
  real cs [NF], sn [NF];   // the current row's rotation, per format

  function automatic int expf(input int f, input logic [63:0] w);
    return int'((w >> (MF[f] - 1)) & ((64'd1 << EF[f]) - 1));
  endfunction

  function automatic logic [63:0] fracf(input int f, input logic [63:0] w);
    return w & ((64'd1 << (MF[f] - 1)) - 1);
  endfunction

  function automatic bit signf(input int f, input logic [63:0] w);
    return w[EF[f] + MF[f] - 1];
  endfunction

  // value of a HUB word times 2^-sc (sc keeps the double-precision
  // reference of rows near the top of the double range finite)
  function automatic real hubval(input int f, input logic [63:0] w, input int sc);
    real v;
    int  e;
    if (expf(f, w) == 0) return 0.0;
    e = expf(f, w) - ((1 << (EF[f] - 1)) - 1);
    v = (1.0 + (real'(fracf(f, w)) + 0.5) / (2.0 ** (MF[f] - 1))) * (2.0 ** (e - sc));
    return signf(f, w) ? -v : v;
  endfunction

  function automatic logic [63:0] mk(input int f, input bit s, input int e);
    logic [63:0] r;
    r = {$urandom, $urandom};
    r = r & ((64'd1 << (MF[f] - 1)) - 1);
    return r | (64'(e) << (MF[f] - 1)) | (64'(s) << (EF[f] + MF[f] - 1));
  endfunction

  function automatic logic [63:0] one(input int f);
    return 64'((1 << (EF[f] - 1)) - 1) << (MF[f] - 1);
  endfunction

  task automatic check_one(input int f, input logic [63:0] got, input real expv,
                           input real size, input int sc, input int k);
    real g, tol, maxf, minn;
    int  bias;
    bias = (1 << (EF[f] - 1)) - 1;
    maxf = (2.0 - 2.0 ** (1 - MF[f])) * (2.0 ** (bias - sc));
    minn = 2.0 ** (1 - bias - sc);
    g = hubval(f, got, sc);
    tol = size * (2.0 ** (5 - MF[f]));
    checks++;
    if (expv >= maxf || expv <= -maxf) begin
      if (expf(f, got) != (1 << EF[f]) - 2 || fracf(f, got) != (64'd1 << (MF[f] - 1)) - 1 ||
          signf(f, got) != (expv < 0)) begin
        failures++;
        $display("FAIL fmt %0d #%0d expected saturation, got %h (exp %e)", f, k, got, expv);
      end else n_sat[f]++;
    end else if (got == '0 && (expv < 2.0 * minn && expv > -2.0 * minn) && (expv > tol || expv < -tol)) begin
      n_uflow[f]++;
    end else if (g - expv > tol || expv - g > tol) begin
      failures++;
      if (failures < 12) $display("FAIL fmt %0d #%0d got %h (%e) expected %e tol %e", f, k, got, g, expv, tol);
    end
  endtask

  // drive the next input pair of format f, element c of the stream
  task automatic drive(input int f, input int c);
    real xv, yv;
    real th;
    int  r, j, kind, eb, ex, ey, bias, emax;
    bias = (1 << (EF[f] - 1)) - 1;
    emax = (1 << EF[f]) - 2;
    r = c / ELEMS;
    j = c % ELEMS;
    kind = r % 8;                      // 0..4 general, 5 identity, 6 tiny, 7 huge
    eb = (kind == 6) ? 2 : (kind == 7) ? emax - 2 : bias;
    if (j == 0) begin
      ex = eb + $urandom_range(0, 2) - 1;
      ey = ex + $urandom_range(0, 6) - 3;
      if (ey < 1) ey = 1;
      if (ey > emax) ey = emax;
      x[f] = mk(f, 1'b0, ex);
      y[f] = mk(f, 1'($urandom), ey);
      vr[f] = 1'b1;
      n_vec[f]++;
    end else begin
      vr[f] = 1'b0;
      n_rot[f]++;
      if (kind == 5 && j >= 4) begin
        x[f] = (j == 4) ? one(f) : '0;
        y[f] = (j == 5) ? one(f) : '0;
        n_one[f]++;
      end else begin
        ex = eb + $urandom_range(0, 4) - 2;
        ey = ex + $urandom_range(0, 2 * NFX[f] + 8) - NFX[f] - 4;
        if (ey < 1) ey = 1;
        if (ey > emax) ey = emax;
        x[f] = mk(f, 1'($urandom), ex);
        y[f] = mk(f, 1'($urandom), ey);
      end
    end
    scq[f][c] = (kind == 7) ? 16 : 0;
    xv = hubval(f, x[f], scq[f][c]);
    yv = hubval(f, y[f], scq[f][c]);
    if (vr[f]) begin
      th = $atan2(yv, xv);
      cs[f] = $cos(th);
      sn[f] = $sin(th);
    end
    exq[f][c] = kg[f] * ( xv * cs[f] + yv * sn[f]);
    eyq[f][c] = kg[f] * (-xv * sn[f] + yv * cs[f]);
    szq[f][c] = kg[f] * ((xv < 0 ? -xv : xv) + (yv < 0 ? -yv : yv));
    vrq[f][c] = vr[f];
  endtask


  initial begin
    int lat, k;
    for (int f = 0; f < NF; f++) begin
      kg[f] = 1.0;
      for (int i = 0; i < ITF[f]; i++) kg[f] = kg[f] * $sqrt(1.0 + 2.0 ** (-2 * i));
      n_vec[f] = 0; n_rot[f] = 0; n_uflow[f] = 0; n_sat[f] = 0; n_one[f] = 0;
      vr[f] = 0; x[f] = '0; y[f] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NP + LATMAX; c++) begin
      @(negedge clk);
      for (int f = 0; f < NF; f++) begin
        lat = 2 + ITF[f] + 3;
        if (c >= lat && c < NP + lat) begin
          k = c - lat;
          check_one(f, x_o[f], exq[f][k], szq[f][k], scq[f][k], k);
          check_one(f, y_o[f], eyq[f][k], szq[f][k], scq[f][k], k);
          checks++;
          if (vr_o[f] != vrq[f][k]) begin
            failures++;
            $display("FAIL fmt %0d #%0d vr_o=%0b", f, k, vr_o[f]);
          end
        end
        if (c < NP) drive(f, c);
        else begin
          vr[f] = 1'b0; x[f] = '0; y[f] = '0;
        end
      end
    end
    for (int f = 0; f < NF; f++) begin
      $display("format E=%0d M=%0d: vectoring=%0d rotation=%0d ones=%0d underflow-flush=%0d saturation=%0d",
               EF[f], MF[f], n_vec[f], n_rot[f], n_one[f], n_uflow[f], n_sat[f]);
      if (n_vec[f] == 0 || n_rot[f] == 0 || n_one[f] == 0 || n_uflow[f] == 0 || n_sat[f] == 0) begin
        failures++;
        $display("FAIL a mechanism never occurred in format %0d", f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NP + LATMAX + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
