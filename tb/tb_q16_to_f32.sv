// tb_q16_to_f32: random Q16.16 values against a real-arithmetic reference
// conversion (normalise, truncate mantissa).
module tb_q16_to_f32;
  import tb_pkg::*;
  logic [31:0] q, f;
  int checks = 0, failures = 0;
  q16_to_f32 dut (.q, .f);

  task automatic check(input logic [31:0] qin);
    logic [31:0] exp;
    q = qin; #1;
    exp = r2f(q2r(qin));
    checks++;
    if (f !== exp) begin
      failures++;
      $display("FAIL q=%h got %h exp %h", qin, f, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(32'h00010000);
    check(32'hffff0000);
    check(32'h00000000);
    check(32'h80000000);
    check(32'h7fffffff);
    check(32'h00000001);
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] r;
      r = $urandom;
      r = r >>> ($urandom % 31);
      if ($urandom % 2) r = -r;
      check(r);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
