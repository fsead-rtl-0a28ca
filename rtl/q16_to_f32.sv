// q16_to_f32: signed Q16.16 to float32, combinational.
//
// The magnitude (33 bits, so that -2^15 converts exactly) is normalised by
// its leading one: exponent = msb - 16 + 127, and the 23 bits below the
// leading one become the mantissa, truncated (round toward zero).
// Interface: q (Q16.16) in, f (float32 bits) out, no clock.
module q16_to_f32
  import fsead_pkg::*;
(
  input  q16_t        q,
  output logic [31:0] f
);
  logic [32:0] mag;
  logic [5:0]  msb;
  logic [55:0] norm;

  always_comb begin
    mag = q[31] ? 33'(-{q[31], q}) : {1'b0, q};
    msb = '0;
    for (int i = 0; i < 33; i++)
      if (mag[i]) msb = 6'(i);
    norm = 56'(mag) << (6'd32 - msb);      // leading one moves to bit 32
    if (mag == '0) f = '0;
    else f = {q[31], 8'(32'(msb) + 127 - 16), norm[31:9]};
  end
endmodule
