// tb_loda_subdetector: random parameters and samples drawn from a small set
// (so bins repeat); each score is compared with a reference model of the
// projection, bin, window count and -log2(c/W), and done must come D+3
// cycles after start.
module tb_loda_subdetector;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int D = 3, BINS = 4, W = 8;
  logic clk = 0, rst = 1, start = 0, busy, done, ack = 0, pwe = 0;
  q16_t [D-1:0] x;
  q16_t score;
  logic [8:0] paddr;
  logic [31:0] pdata;
  int checks = 0, failures = 0;
  int prj[D];
  int lmin, lscale;
  int hist[$];

  loda_subdetector #(.D(D), .BINS(BINS), .W(W)) dut (.*);
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
    for (int d = 0; d < D; d++) begin
      prj[d] = int'($urandom % 131072) - 65536;      // [-1, 1)
      wr(d, prj[d]);
    end
    lmin = -3 * 65536;  wr(D, lmin);
    lscale = 65536 * BINS / 6; wr(D + 1, lscale);    // range [-3, 3)
    for (int t = 0; t < 200; t++) begin
      int acc, tq, b, c, cyc;
      real exp_s, got;
      for (int d = 0; d < D; d++) x[d] = q16_t'((int'($urandom % 5) - 2) * 32768);
      acc = 0;
      for (int d = 0; d < D; d++) acc += qm(x[d], prj[d]);
      tq = qm(acc - lmin, lscale);
      b  = tq >>> 16;
      if (b < 0) b = 0;
      if (b > BINS - 1) b = BINS - 1;
      c = 0;
      for (int i = 0; i < hist.size(); i++) if (hist[i] == b) c++;
      exp_s = log2r(real'(W)) - log2r(real'(c == 0 ? 1 : c));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != D + 3) begin failures++; $display("FAIL latency %0d", cyc); end
      got = q2r(score);
      checks++;
      if (got - exp_s > 0.0001 || exp_s - got > 0.0001) begin
        failures++;
        $display("FAIL t=%0d bin %0d c %0d got %f exp %f", t, b, c, got, exp_s);
      end
      hist.push_back(b);
      if (hist.size() > W) void'(hist.pop_front());
      ack = 1; @(negedge clk); ack = 0;
      checks++;
      if (busy) begin failures++; $display("FAIL not idle after ack"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
