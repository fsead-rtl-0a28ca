// tb_log2_lut: every table entry against log2 computed in real arithmetic
// (entry must be the truncated value, within one lsb), exact at powers of two.
module tb_log2_lut;
  import tb_pkg::*;
  localparam int DEPTH = 514;
  logic [$clog2(DEPTH)-1:0] idx;
  logic [31:0] lq;
  int checks = 0, failures = 0;
  log2_lut #(.DEPTH(DEPTH)) dut (.idx, .log2_q(lq));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    idx = 0; #1;
    checks++; if (lq != 0) failures++;
    for (int i = 1; i < DEPTH; i++) begin
      real ex, d;
      idx = 10'(i); #1;
      ex = log2r(real'(i)) * 65536.0;
      d  = ex - real'($signed(lq));
      checks++;
      if (d < -0.01 || d > 1.5) begin
        failures++;
        $display("FAIL log2(%0d) got %h exp %f", i, lq, ex / 65536.0);
      end
      if ((i & (i - 1)) == 0) begin
        checks++;
        if (lq != (32'($clog2(i)) << 16)) begin failures++; $display("FAIL pow2 %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
