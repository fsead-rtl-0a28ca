// f32_to_q16: float32 to signed Q16.16, combinational.
//
// The 24-bit significand (hidden one included) is signed, then shifted
// arithmetically by (exponent - 134): left for large values, right for small
// ones. The right shift floors the value (truncation toward minus infinity)
// and the result keeps only its low 32 bits (wrap-around on overflow), which
// is how the fixed-point type the detectors use behaves. A zero exponent
// (zero or denormal) gives 0; Inf and NaN are not special-cased.
// Interface: f (float32 bits) in, q (Q16.16) out, no clock.
module f32_to_q16
  import fsead_pkg::*;
(
  input  logic [31:0] f,
  output q16_t        q
);
  logic        sgn;
  logic [7:0]  ex;
  logic signed [63:0] mag;
  logic signed [9:0]  sh;
  logic signed [63:0] v;

  always_comb begin
    sgn = f[31];
    ex  = f[30:23];
    mag = {40'd0, 1'b1, f[22:0]};
    if (sgn) mag = -mag;
    sh  = $signed({2'b00, ex}) - 10'sd134;
    if (ex == 8'd0)        v = '0;
    else if (sh >= 10'sd40) v = '0;               // all significant bits above bit 31
    else if (sh >= 0)      v = mag <<< sh;
    else if (sh <= -10'sd40) v = sgn ? -64'sd1 : 64'sd0;
    else                   v = mag >>> (-sh);
    q = q16_t'(v[31:0]);
  end
endmodule
