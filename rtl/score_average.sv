// score_average: ensemble score averaging, (score_1 + ... + score_R) / R.
//
// The R Q16.16 scores are summed in a wide accumulator and multiplied by
// the constant round(2^32 / R); the product is shifted back by 32 bits
// arithmetically (floor). Combinational. The reciprocal multiply in place of a divider is
// this design's choice.
module score_average
  import fsead_pkg::*;
#(
  parameter int R = 35
) (
  input  q16_t [R-1:0] scores,
  output q16_t         avg
);
  localparam logic signed [33:0] INV_R = 34'((64'd4294967296 + 64'(R / 2)) / 64'(R));
  localparam int SW = 32 + $clog2(R + 1);

  logic signed [SW-1:0] sum;
  logic signed [SW+33:0] prod;

  always_comb begin
    sum = '0;
    for (int i = 0; i < R; i++) sum += SW'(scores[i]);
    prod = (SW+34)'(sum) * (SW+34)'(INV_R);
    avg  = q16_t'(prod >>> 32);
  end
endmodule
