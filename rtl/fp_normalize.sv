// fp_normalize: the normalization module of the output converters.
//
// A leading-one detector followed by a left shifter: the unsigned input is
// shifted left until its most significant bit is one, and the number of
// positions shifted is returned so that the converter can lower the common
// exponent by that amount.  An all-zero input is flagged with `zero` (the
// shift count is then WIDTH-1 and the output zero).  The paper names the
// module and its two parts; the priority-loop detector is this design's own,
// simplest choice.  Purely combinational.
module fp_normalize #(
  parameter int unsigned WIDTH = 27,
  parameter int unsigned CNT_W = $clog2(WIDTH)
) (
  input  logic [WIDTH-1:0] value_i,
  output logic [WIDTH-1:0] norm_o,    // value_i << shift_o
  output logic [CNT_W-1:0] shift_o,   // leading zeros of value_i
  output logic             zero_o     // value_i == 0
);

  always_comb begin
    shift_o = CNT_W'(WIDTH - 1);
    for (int i = 0; i < WIDTH; i++) begin
      if (value_i[i]) shift_o = CNT_W'(WIDTH - 1 - i);
    end
  end

  assign zero_o = (value_i == '0);
  assign norm_o = value_i << shift_o;

endmodule
