// tb_rshash_subdetector: random parameters and samples from a small set; the
// reference model normalises, projects, floors, hashes each CMS row with its
// seed, counts codes over the last W samples and forms -log2(1 + min c);
// done must come D+2 cycles after start.
module tb_rshash_subdetector;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int D = 3, CMS_W = 2, MOD = 16, W = 8;
  logic clk = 0, rst = 1, start = 0, busy, done, ack = 0, pwe = 0;
  q16_t [D-1:0] x, nmin, nscale;
  q16_t score;
  logic [8:0] paddr;
  logic [31:0] pdata;
  int checks = 0, failures = 0;
  int alpha[D];
  int inv_f;
  int hist[CMS_W][$];

  rshash_subdetector #(.D(D), .CMS_W(CMS_W), .MOD(MOD), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk); pwe = 1; paddr = 9'(a); pdata = d;
    @(negedge clk); pwe = 0;
  endtask

  initial begin
    x = '0;
    for (int d = 0; d < D; d++) begin
      nmin[d]   = q16_t'(-2 * 65536);
      nscale[d] = q16_t'(65536 / 4);                  // range [-2, 2)
    end
    repeat (2) @(negedge clk);
    rst = 0;
    for (int d = 0; d < D; d++) begin
      alpha[d] = int'($urandom % 65536);
      wr(d, alpha[d]);
    end
    inv_f = 3 * 65536; wr(D, inv_f);
    for (int t = 0; t < 200; t++) begin
      int unsigned key[$];
      int code[CMS_W];
      int c, minc, cyc;
      real exp_s, got;
      key = {};
      for (int d = 0; d < D; d++) x[d] = q16_t'((int'($urandom % 5) - 2) * 32768);
      for (int d = 0; d < D; d++)
        key.push_back(32'(qm(qm(x[d] - nmin[d], nscale[d]) + alpha[d], inv_f) >>> 16));
      minc = 1 << 30;
      for (int r = 0; r < CMS_W; r++) begin
        code[r] = int'(jenkins(r + 1, key, MOD));
        c = 0;
        for (int i = 0; i < hist[r].size(); i++) if (hist[r][i] == code[r]) c++;
        if (c < minc) minc = c;
      end
      exp_s = -log2r(1.0 + real'(minc));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != D + 2) begin failures++; $display("FAIL latency %0d", cyc); end
      got = q2r(score);
      checks++;
      if (got - exp_s > 0.0001 || exp_s - got > 0.0001) begin
        failures++;
        $display("FAIL t=%0d min %0d got %f exp %f", t, minc, got, exp_s);
      end
      for (int r = 0; r < CMS_W; r++) begin
        hist[r].push_back(code[r]);
        if (hist[r].size() > W) void'(hist[r].pop_front());
      end
      ack = 1; @(negedge clk); ack = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
