// tb_fix_givens_rotator: self-checking test of the fixed-point CORDIC
// Givens rotator, HUB and two's complement versions side by side.
//
// A continuous stream of "rows" is sent, one pair per clock, with no gaps:
// each row starts with a vectoring pair (random angle in (-90, 90) degrees,
// random length) followed by 1 to 7 rotation pairs.  The reference is
// floating-point math: the vectoring pair must come out as (K*r, 0) and each
// rotation pair as K times the pair rotated by minus the row's angle, where
// K = prod sqrt(1 + 2^-2i).  Every output is compared exactly ITER cycles
// after its input, so a wrong latency fails; the tolerance (in LSBs) covers
// the residual angle and the rounding of ITER stages.
module tb_fix_givens_rotator;
  localparam int unsigned N    = 26;
  localparam int unsigned W    = N + 2;
  localparam int unsigned ITER = 24;
  localparam int          NPAIRS = 600;
  localparam real         TOL  = 48.0;   // LSBs
  localparam real         PI   = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_vec = 0, n_rot = 0;

  logic                vr;
  logic signed [W-1:0] x, y;
  logic                vr_o [2];
  logic signed [W-1:0] x_o  [2];
  logic signed [W-1:0] y_o  [2];

  for (genvar h = 0; h < 2; h++) begin : g_dut
    fix_givens_rotator #(.W(W), .ITER(ITER), .HUB(h)) dut (
      .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x), .y_i(y),
      .vr_o(vr_o[h]), .x_o(x_o[h]), .y_o(y_o[h]));
  end

  real ex_q [NPAIRS];
  real ey_q [NPAIRS];
  bit  vr_q [NPAIRS];
  real kgain;

  // value of an output word: HUB words carry an implicit half LSB
  function automatic real val(input logic signed [W-1:0] w, input int hub);
    return real'(w) + (hub != 0 ? 0.5 : 0.0);
  endfunction

  initial begin
    real th, r, cs, sn, xv, yv;
    int left;
    kgain = 1.0;
    for (int i = 0; i < ITER; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2 * i));
    vr = 0; x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    left = 0;
    for (int n = 0; n < NPAIRS + ITER; n++) begin
      @(negedge clk);
      // compare the output of the pair sent ITER cycles ago
      if (n >= ITER) begin
        int k;
        k = n - ITER;
        for (int h = 0; h < 2; h++) begin
          real dx, dy;
          dx = val(x_o[h], h) - ex_q[k];
          dy = val(y_o[h], h) - ey_q[k];
          checks++;
          if (dx > TOL || dx < -TOL || dy > TOL || dy < -TOL || vr_o[h] != vr_q[k]) begin
            failures++;
            if (failures < 10)
              $display("FAIL hub=%0d pair %0d vr=%0b got (%0d,%0d) expected (%f,%f)",
                       h, k, vr_q[k], x_o[h], y_o[h], ex_q[k], ey_q[k]);
          end
        end
      end
      if (n < NPAIRS) begin
        if (left == 0) begin
          // new row: vectoring pair
          left = $urandom_range(1, 7);
          th = (real'($urandom_range(0, 1000000)) / 1000000.0 - 0.5) * 0.999 * PI;
          r  = (1.0 + 0.4 * real'($urandom_range(0, 1000000)) / 1000000.0) * 2.0 ** (N - 2);
          xv = r * $cos(th);
          yv = r * $sin(th);
          vr = 1'b1;
          n_vec++;
        end else begin
          xv = (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * 1.4 * 2.0 ** (N - 2);
          yv = (real'($urandom_range(0, 2000000)) / 1000000.0 - 1.0) * 1.4 * 2.0 ** (N - 2);
          vr = 1'b0;
          left--;
          n_rot++;
        end
        x = W'(longint'($floor(xv)));
        y = W'(longint'($floor(yv)));
        if (vr) begin
          th = $atan2(real'(y), real'(x));
          cs = $cos(th);
          sn = $sin(th);
        end
        ex_q[n] = kgain * ( real'(x) * cs + real'(y) * sn);
        ey_q[n] = kgain * (-real'(x) * sn + real'(y) * cs);
        vr_q[n] = vr;
      end else begin
        vr = 1'b0;
      end
    end
    if (n_vec == 0 || n_rot == 0) failures++;
    $display("vectoring pairs=%0d rotation pairs=%0d", n_vec, n_rot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
