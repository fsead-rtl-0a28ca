// tb_pkg: helpers shared by the testbenches: conversions between real and
// Q16.16 / float32 written independently of the design, and reference
// models of the log2 score and the Jenkins hash.
package tb_pkg;

  function automatic real q2r(input logic [31:0] q);
    return real'($signed(q)) / 65536.0;
  endfunction

  function automatic logic [31:0] r2q(input real r);
    return 32'($rtoi($floor(r * 65536.0)));
  endfunction

  // float32 bit pattern -> real (normal numbers and zero)
  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    if (f[30:23] == 0) return 0.0;
    m = 1.0 + real'(f[22:0]) / 8388608.0;
    e = int'(f[30:23]) - 127;
    m = m * (2.0 ** e);
    return f[31] ? -m : m;
  endfunction

  // real -> float32 bit pattern, mantissa truncated
  function automatic logic [31:0] r2f(input real r);
    real a;
    int  e;
    logic [22:0] man;
    if (r == 0.0) return 32'd0;
    a = (r < 0) ? -r : r;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    man = 23'($rtoi($floor((a - 1.0) * 8388608.0)));
    return {(r < 0), 8'(e + 127), man};
  endfunction

  function automatic real log2r(input real x);
    return $ln(x) / $ln(2.0);
  endfunction

  function automatic int unsigned jenkins(input int unsigned seed, input int unsigned key[$],
                                          input int unsigned mod);
    int unsigned h;
    h = seed;
    foreach (key[i]) begin
      h = h + key[i];
      h = h + (h << 10);
      h = h ^ (h >> 6);
    end
    h = h + (h << 3);
    h = h ^ (h >> 11);
    h = h + (h << 15);
    return h % mod;
  endfunction

  // Q16.16 multiply of the reference models (floor of the exact product)
  function automatic int qm(input int a, input int b);
    longint p;
    p = longint'(a) * longint'(b);
    return int'(p >>> 16);
  endfunction

endpackage
