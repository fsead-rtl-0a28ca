// tb_xstream_subdetector: random projection matrix, shifts and scales;
// samples from a small set. The reference model projects to K values, bins
// them per row, hashes the K bins of each row, counts codes over the last W
// samples and forms -log2(1 + min_r 2^r c_r); done must come D+K+3 cycles
// after start.
module tb_xstream_subdetector;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int D = 3, K = 4, CMS_W = 2, MOD = 16, W = 8;
  logic clk = 0, rst = 1, start = 0, busy, done, ack = 0, pwe = 0;
  q16_t [D-1:0] x;
  q16_t score;
  logic [8:0] paddr;
  logic [31:0] pdata;
  int checks = 0, failures = 0;
  int pm[D][K];
  int sh[K];
  int sc[CMS_W][K];
  int hist[CMS_W][$];

  xstream_subdetector #(.D(D), .K(K), .CMS_W(CMS_W), .MOD(MOD), .W(W)) dut (.*);
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
    repeat (2) @(negedge clk);
    rst = 0;
    for (int d = 0; d < D; d++)
      for (int k = 0; k < K; k++) begin
        pm[d][k] = int'($urandom % 131072) - 65536;
        wr(d * K + k, pm[d][k]);
      end
    for (int k = 0; k < K; k++) begin
      sh[k] = int'($urandom % 65536);
      wr(D * K + k, sh[k]);
    end
    for (int r = 0; r < CMS_W; r++)
      for (int k = 0; k < K; k++) begin
        sc[r][k] = (65536 / 2) << r;
        wr(D * K + K + r * K + k, sc[r][k]);
      end
    for (int t = 0; t < 200; t++) begin
      int prj[K];
      int code[CMS_W];
      int c, minc, cyc;
      real exp_s, got;
      for (int d = 0; d < D; d++) x[d] = q16_t'((int'($urandom % 5) - 2) * 32768);
      for (int k = 0; k < K; k++) begin
        prj[k] = 0;
        for (int d = 0; d < D; d++) prj[k] += qm(x[d], pm[d][k]);
      end
      minc = 1 << 30;
      for (int r = 0; r < CMS_W; r++) begin
        int unsigned key[$];
        key = {};
        for (int k = 0; k < K; k++) key.push_back(32'(qm(prj[k] + sh[k], sc[r][k]) >>> 16));
        code[r] = int'(jenkins(r + 1, key, MOD));
        c = 0;
        for (int i = 0; i < hist[r].size(); i++) if (hist[r][i] == code[r]) c++;
        if ((c << (r + 1)) < minc) minc = c << (r + 1);
      end
      exp_s = -log2r(1.0 + real'(minc));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != D + K + 3) begin failures++; $display("FAIL latency %0d", cyc); end
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
