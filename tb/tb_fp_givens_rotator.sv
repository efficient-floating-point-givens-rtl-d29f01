// tb_fp_givens_rotator: end-to-end test of the floating-point Givens rotation
// unit at its default configuration (HUB, single precision, N=26, 24
// microrotations).
//
// The unit is fed a gap-free stream of row pairs of e = 8 elements, the size
// of a 4x4 QR decomposition with Q computed: the first pair of each row is
// sent with vr=1 (angle computation), the other seven with vr=0.  Rows of
// several kinds make every mechanism of the design occur: general random
// rows with widely spread exponents (alignment of X or of Y, alignment
// shifts beyond N that force zero), rows that carry identity-matrix elements
// (exact 1.0 operands and zeros), rows of tiny numbers whose results
// underflow and rows of huge numbers whose results overflow.
//
// The reference is double-precision math on the HUB input values: the angle
// is atan2(y, x) of the row's first pair and every pair is expected as
// K * (x cos + y sin, -x sin + y cos), K = prod sqrt(1 + 2^-2i).  Each result
// must appear exactly 2 + 24 + 3 = 29 clocks after its input and lie within
// 2^-19 of the pair's size; results below the smallest normal may be flushed
// to zero, results above the largest finite value must saturate.  Every
// mechanism is counted and a mechanism that never happened is a failure.
module tb_fp_givens_rotator;
  localparam int E = 8, M = 24, ITER = 24;
  localparam int LAT = 2 + ITER + 3;
  localparam int ROWS = 160, ELEMS = 8;
  localparam int NP = ROWS * ELEMS;
  localparam real MAXF = (2.0 - 2.0 ** (-23)) * (2.0 ** 127);
  localparam real MINN = 2.0 ** (-126);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic vr, vr_o;
  logic [E+M-1:0] x, y, x_o, y_o;

  fp_givens_rotator dut (
    .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x), .y_i(y),
    .vr_o(vr_o), .x_o(x_o), .y_o(y_o));

  // mechanism counters
  int n_vec = 0, n_rot = 0, n_xbig = 0, n_ybig = 0, n_force0 = 0;
  int n_one = 0, n_zero = 0, n_uflow = 0, n_sat = 0;

  real exq [NP], eyq [NP], szq [NP];
  bit  vrq [NP];
  real kgain;

  function automatic real hubval(input logic [E+M-1:0] f);
    real v;
    int  e;
    e = int'(f[E+M-2 -: E]) - 127;
    if (f[E+M-2 -: E] == 0) return 0.0;
    v = (1.0 + (real'(f[M-2:0]) + 0.5) / (2.0 ** (M - 1))) * (2.0 ** e);
    return f[E+M-1] ? -v : v;
  endfunction

  function automatic logic [E+M-1:0] mk(input bit s, input int e);
    return {s, E'(e), (M-1)'($urandom)};
  endfunction

  localparam logic [E+M-1:0] ONE = {1'b0, 8'd127, 23'd0};

  // compare one output word with its expectation
  task automatic check_one(input logic [E+M-1:0] got, input real expv, input real size, input int k);
    real g, tol;
    g = hubval(got);
    tol = size * (2.0 ** (-19));
    checks++;
    if (expv >= MAXF || expv <= -MAXF) begin
      if (got[E+M-2:0] != {8'd254, 23'h7fffff} || got[E+M-1] != (expv < 0)) begin
        failures++;
        $display("FAIL #%0d expected saturation, got %h", k, got);
      end else n_sat++;
    end else if (got == '0 && (expv < 2.0 * MINN && expv > -2.0 * MINN) && (expv > tol || expv < -tol)) begin
      n_uflow++;
    end else if (g - expv > tol || expv - g > tol) begin
      failures++;
      if (failures < 12) $display("FAIL #%0d got %h (%e) expected %e tol %e", k, got, g, expv, tol);
    end
  endtask

  initial begin
    real xv, yv, th, cs, sn;
    int kind, eb, ex, ey, k, n;
    kgain = 1.0;
    for (int i = 0; i < ITER; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2 * i));
    vr = 0; x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n = 0;
    for (int c = 0; c < NP + LAT; c++) begin
      @(negedge clk);
      if (c >= LAT) begin
        k = c - LAT;
        check_one(x_o, exq[k], szq[k], k);
        check_one(y_o, eyq[k], szq[k], k);
        checks++;
        if (vr_o != vrq[k]) begin
          failures++;
          $display("FAIL #%0d vr_o=%0b", k, vr_o);
        end
      end
      if (c < NP) begin
        int r, j;
        r = c / ELEMS;
        j = c % ELEMS;
        kind = r % 8;                      // 0..4 general, 5 identity, 6 tiny, 7 huge
        eb = (kind == 6) ? 2 : (kind == 7) ? 252 : 127;
        if (j == 0) begin
          // vectoring pair: X positive so the angle is within CORDIC range
          ex = eb + $urandom_range(0, 2) - 1;
          ey = ex + $urandom_range(0, 6) - 3;
          if (kind == 1) ey = ex - $urandom_range(27, 40);
          if (ey < 1) ey = 1;
          x = mk(1'b0, ex);
          y = mk(1'($urandom), ey);
          vr = 1'b1;
          n_vec++;
        end else begin
          vr = 1'b0;
          n_rot++;
          if (kind == 5 && j >= 4) begin
            // Q part of a QR row pair: identity elements
            x = (j == 4) ? ONE : '0;
            y = (j == 5) ? ONE : '0;
          end else begin
            ex = eb + $urandom_range(0, 4) - 2;
            case ($urandom_range(0, 3))
              0: ey = ex;
              1: ey = ex + $urandom_range(1, 10);
              2: ey = ex - $urandom_range(1, 10);
              default: ey = ($urandom & 1) ? ex + $urandom_range(27, 40) : ex - $urandom_range(27, 40);
            endcase
            if (ey < 1) ey = 1;
            if (ey > 254) ey = 254;
            x = mk(1'($urandom), ex);
            y = mk(1'($urandom), ey);
          end
        end
        // mechanism bookkeeping from the operands
        ex = int'(x[30:23]); ey = int'(y[30:23]);
        if (x == ONE) n_one++;
        if (y == ONE) n_one++;
        if (ex == 0) n_zero++;
        if (ey == 0) n_zero++;
        if (ex < ey) n_ybig++; else n_xbig++;
        if (ex - ey > 26 || ey - ex > 26) n_force0++;
        // reference
        xv = hubval(x);
        yv = hubval(y);
        if (vr) begin
          th = $atan2(yv, xv);
          cs = $cos(th);
          sn = $sin(th);
        end
        exq[c] = kgain * ( xv * cs + yv * sn);
        eyq[c] = kgain * (-xv * sn + yv * cs);
        szq[c] = kgain * ((xv < 0 ? -xv : xv) + (yv < 0 ? -yv : yv));
        vrq[c] = vr;
      end else begin
        vr = 1'b0;
        x = '0;
        y = '0;
      end
    end
    $display("vectoring=%0d rotation=%0d x-larger=%0d y-larger=%0d shifted-to-zero=%0d ones=%0d zeros=%0d underflow-flush=%0d saturation=%0d",
             n_vec, n_rot, n_xbig, n_ybig, n_force0, n_one, n_zero, n_uflow, n_sat);
    if (n_vec == 0 || n_rot == 0 || n_xbig == 0 || n_ybig == 0 || n_force0 == 0 ||
        n_one == 0 || n_zero == 0 || n_uflow == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NP + LAT + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
