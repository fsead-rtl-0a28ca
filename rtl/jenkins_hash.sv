// jenkins_hash: Jenkins one-at-a-time hash, one key element per clock.
//
// init loads the seed into the 32-bit state. Each cycle with en set absorbs
// one key element: h += key; h += h << 10; h ^= h >> 6 (the pipelined inner
// loop, initiation interval 1). The output code is the final avalanche of
// the present state, h += h << 3; h ^= h >> 11; h += h << 15, reduced
// modulo MOD; it is combinational, so it is valid in the cycle after the
// last element was absorbed. init has priority over en.
module jenkins_hash #(
  parameter int MOD = 128
) (
  input  logic                   clk,
  input  logic                   init,
  input  logic [31:0]            seed,
  input  logic                   en,
  input  logic [31:0]            key,
  output logic [$clog2(MOD)-1:0] code
);
  logic [31:0] h;

  function automatic logic [31:0] step(input logic [31:0] s, input logic [31:0] k);
    logic [31:0] t;
    t = s + k;
    t = t + (t << 10);
    t = t ^ (t >> 6);
    return t;
  endfunction

  function automatic logic [31:0] fin(input logic [31:0] s);
    logic [31:0] t;
    t = s + (s << 3);
    t = t ^ (t >> 11);
    t = t + (t << 15);
    return t;
  endfunction

  always_ff @(posedge clk) begin
    if (init)    h <= seed;
    else if (en) h <= step(h, key);
  end

  assign code = $clog2(MOD)'(fin(h) % 32'(MOD));
endmodule
