// tb_fp_normalize: self-checking test of the leading-one detector and left
// shifter.  Random values of every magnitude (one random bit position set
// as the leading one, random bits below) plus zero; the expected shift is the
// distance of the leading one from the MSB, found by repeated halving, and
// the expected output is the input multiplied by 2^shift.
module tb_fp_normalize;
  localparam int unsigned WIDTH = 27;
  localparam int unsigned CW    = $clog2(WIDTH);

  logic [WIDTH-1:0] value, norm;
  logic [CW-1:0]    shift;
  logic             zero;
  int checks = 0, failures = 0;

  fp_normalize #(.WIDTH(WIDTH), .CNT_W(CW)) dut (
    .value_i(value), .norm_o(norm), .shift_o(shift), .zero_o(zero));

  task automatic check(input logic [WIDTH-1:0] v);
    longint unsigned t;
    int   msb;
    longint unsigned expn;
    value = v;
    #1;
    t = v; msb = -1;
    while (t != 0) begin t = t / 2; msb++; end
    checks++;
    if (v == 0) begin
      if (!zero || norm != 0) begin
        failures++; $display("FAIL zero input: zero=%0b norm=%h", zero, norm);
      end
    end else begin
      expn = longint'(v) * (64'd1 << (WIDTH - 1 - msb));
      if (zero || shift != CW'(WIDTH - 1 - msb) || norm != expn[WIDTH-1:0]) begin
        failures++;
        $display("FAIL v=%h shift=%0d exp %0d norm=%h exp %h", v, shift, WIDTH-1-msb, norm, expn[WIDTH-1:0]);
      end
    end
  endtask

  initial begin
    check('0);
    for (int p = 0; p < WIDTH; p++) begin
      check(WIDTH'(1) << p);
      repeat (20) check((WIDTH'(1) << p) | (WIDTH'($urandom) & ((WIDTH'(1) << p) - 1)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
