// log2_lut: read-only table of log2(i), i = 0 .. DEPTH-1, in signed Q16.16.
//
// The Score stage of every sub-detector turns a window count into a
// negative log-likelihood through this table instead of a logarithm unit,
// as the detectors were specified. Entry 0 holds 0 (log2 of 0 is never
// used: callers pass a count of at least 1). The contents are computed at
// elaboration by a constant function: the integer part is the position of
// the leading one, and each of the 16 fraction bits comes from squaring the
// normalised mantissa y in [1,2) and halving it when it reaches 2
// (truncated, not rounded). The depth is a parameter chosen by the caller
// from its window length (W+2 for counts up to W+1, 2^w*W+2 for xStream).
// Interface: idx in, log2_q out, combinational (a ROM).
module log2_lut
  import fsead_pkg::*;
#(
  parameter int DEPTH = 130
) (
  input  logic [$clog2(DEPTH)-1:0] idx,
  output q16_t                     log2_q
);
  function automatic logic [31:0] log2_fix(input int unsigned i);
    int unsigned n;
    logic [63:0] y;
    logic [15:0] frac;
    if (i == 0) return 32'd0;
    n = 0;
    for (int b = 0; b < 32; b++)
      if (i[b]) n = b;
    y = 64'(i) << (30 - n);              // y in [1,2) with 30 fraction bits
    frac = '0;
    for (int b = 15; b >= 0; b--) begin
      y = (y * y) >> 30;
      if (y >= (64'd2 << 30)) begin
        y = y >> 1;
        frac[b] = 1'b1;
      end
    end
    return {n[15:0], frac};
  endfunction

  function automatic logic [DEPTH*32-1:0] gen_table();
    logic [DEPTH*32-1:0] tbl;
    tbl = '0;
    for (int i = 0; i < DEPTH; i++)
      tbl[i*32 +: 32] = log2_fix(i);
    return tbl;
  endfunction

  localparam logic [DEPTH*32-1:0] TABLE = gen_table();

  always_comb begin
    if (32'(idx) < DEPTH) log2_q = q16_t'(TABLE[32'(idx)*32 +: 32]);
    else                  log2_q = '0;
  end
endmodule
