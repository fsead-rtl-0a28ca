// tb_f32_to_q16: random and corner float32 values against a real-arithmetic
// reference (floor of value * 2^16).
module tb_f32_to_q16;
  import tb_pkg::*;
  logic [31:0] f, q;
  int checks = 0, failures = 0;
  f32_to_q16 dut (.f, .q);

  task automatic check(input logic [31:0] fin, input logic [31:0] exp);
    f = fin; #1;
    checks++;
    if (q !== exp) begin
      failures++;
      $display("FAIL f=%h got %h exp %h", fin, q, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(32'h3f800000, 32'h00010000);   // 1.0
    check(32'hbfc00000, 32'hfffe8000);   // -1.5
    check(32'h00000000, 32'h00000000);   // 0
    check(32'h37800000, 32'h00000001);   // 2^-16
    check(32'hb7000000, 32'hffffffff);   // -2^-17 floors to -1 lsb
    check(32'h33800000, 32'h00000000);   // 2^-24 truncates to 0
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] r;
      real v;
      r = $urandom;
      r[30:23] = 8'(100 + ($urandom % 41));      // 2^-27 .. 2^13
      v = f2r(r);
      check(r, 32'($rtoi($floor(v * 65536.0))));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
