// tb_cordic_stage: self-checking test of one CORDIC microrotation stage, in
// both the HUB and the two's complement version and for several shift
// amounts.  Random streams of pairs are sent with v/r set on some of them.
// The reference model keeps its own sigma per stage and computes the
// expected result arithmetically:
//   two's complement: a +/- floor(b / 2^i)
//   HUB:              a +/- floor((floor((2b+1) / 2^i) + 1) / 2)
// (the HUB formula is the truncated sum of the two HUB values, each with its
// implicit half LSB).  Results are checked one clock after the inputs, which
// also checks the one-cycle latency.
module tb_cordic_stage;
  localparam int unsigned W = 28;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                vr;
  logic signed [W-1:0] x, y;

  localparam int NS = 4;
  localparam int SH [NS] = '{0, 1, 5, 17};

  logic                vr_o [2][NS];
  logic signed [W-1:0] x_o  [2][NS];
  logic signed [W-1:0] y_o  [2][NS];

  for (genvar h = 0; h < 2; h++) begin : g_h
    for (genvar s = 0; s < NS; s++) begin : g_s
      cordic_stage #(.W(W), .SHIFT(SH[s]), .HUB(h)) dut (
        .clk(clk), .rst_n(rst_n), .vr_i(vr), .x_i(x), .y_i(y),
        .vr_o(vr_o[h][s]), .x_o(x_o[h][s]), .y_o(y_o[h][s]));
    end
  end

  function automatic longint fl(input real r);   // floor to integer
    return longint'($floor(r));
  endfunction

  function automatic longint term(input longint b, input int i, input bit hub);
    if (hub) return fl((real'(fl((2.0 * b + 1.0) / (2.0 ** i))) + 1.0) / 2.0);
    else     return fl(b / (2.0 ** i));
  endfunction

  function automatic longint wrap(input longint v);  // to W-bit two's complement
    logic signed [W-1:0] t;
    t = W'(v);
    return longint'(t);
  endfunction

  bit sig_ref [2][NS];

  initial begin
    longint ex, ey, xi, yi;
    bit d;
    vr = 0; x = '0; y = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      vr = (n % 5 == 0) || ($urandom_range(0, 9) == 0);
      x  = W'($signed($urandom_range(0, 2**26)) - 2**25);
      y  = W'($signed($urandom_range(0, 2**26)) - 2**25);
      xi = longint'(x); yi = longint'(y);
      @(posedge clk); #1;
      for (int h = 0; h < 2; h++)
        for (int s = 0; s < NS; s++) begin
          d = vr ? (yi < 0) : sig_ref[h][s];
          if (vr) sig_ref[h][s] = (yi < 0);
          ex = wrap(d ? xi - term(yi, SH[s], h[0]) : xi + term(yi, SH[s], h[0]));
          ey = wrap(d ? yi + term(xi, SH[s], h[0]) : yi - term(xi, SH[s], h[0]));
          checks++;
          if (longint'(x_o[h][s]) != ex || longint'(y_o[h][s]) != ey || vr_o[h][s] != vr) begin
            failures++;
            if (failures < 10)
              $display("FAIL hub=%0d shift=%0d vr=%0b x=%0d y=%0d -> %0d,%0d expected %0d,%0d",
                       h, SH[s], vr, xi, yi, x_o[h][s], y_o[h][s], ex, ey);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
