// tb_jenkins_hash: random keys of random length and seeds, absorbed one
// element per cycle, against the reference hash of the test package.
module tb_jenkins_hash;
  import tb_pkg::*;
  localparam int MOD = 128;
  logic clk = 0, init, en;
  logic [31:0] seed, key;
  logic [6:0] code;
  int checks = 0, failures = 0;
  jenkins_hash #(.MOD(MOD)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    init = 0; en = 0; seed = 0; key = 0;
    for (int t = 0; t < 300; t++) begin
      int unsigned keys[$];
      int len;
      keys = {};
      len  = 1 + $urandom % 21;
      @(negedge clk); init = 1; seed = $urandom % 4;
      @(negedge clk); init = 0;
      for (int i = 0; i < len; i++) begin
        keys.push_back($urandom % 64 - 32);
        en = 1; key = keys[i];
        @(negedge clk);
        if ($urandom % 3 == 0) begin en = 0; @(negedge clk); end
      end
      en = 0;
      #1;
      checks++;
      if (code != 7'(jenkins(seed, keys, MOD))) begin
        failures++;
        $display("FAIL t=%0d got %0d exp %0d", t, code, jenkins(seed, keys, MOD));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
