// tb_ad_ensemble: four partitions side by side, one per module kind.
//  - Loda (R=3): random per-sub-detector parameters, samples from a small
//    set; every output score is compared with a reference model of all three
//    sub-detectors and their mean, and the label with the threshold.
//  - RS-Hash and xStream (R=2): the same sample is sent repeatedly, so in
//    the n-th output every count equals min(n, W) whatever the hash
//    parameters, and the score must be -log2(1+n) and -log2(1+2n).
//  - Identity: every beat must come out unchanged.
// The output side stalls at random.
module tb_ad_ensemble;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int D = 3, W = 8, BINS = 4, MOD = 16, K = 4;
  logic clk = 0, rst = 1;
  logic       s_valid[4], s_ready[4], m_valid[4], m_ready[4];
  axis_beat_t s_beat[4], m_beat[4];
  cfg_wr_t    cfg[4];
  int checks = 0, failures = 0;

  ad_ensemble #(.KIND(RM_LODA), .R(3), .D(D), .W(W), .BINS(BINS)) u_loda (
    .clk, .rst, .s_valid(s_valid[0]), .s_ready(s_ready[0]), .s_beat(s_beat[0]),
    .m_valid(m_valid[0]), .m_ready(m_ready[0]), .m_beat(m_beat[0]), .cfg(cfg[0]));
  ad_ensemble #(.KIND(RM_RSHASH), .R(2), .D(D), .W(W), .MOD(MOD)) u_rsh (
    .clk, .rst, .s_valid(s_valid[1]), .s_ready(s_ready[1]), .s_beat(s_beat[1]),
    .m_valid(m_valid[1]), .m_ready(m_ready[1]), .m_beat(m_beat[1]), .cfg(cfg[1]));
  ad_ensemble #(.KIND(RM_XSTREAM), .R(2), .D(D), .W(W), .MOD(MOD), .K(K)) u_xs (
    .clk, .rst, .s_valid(s_valid[2]), .s_ready(s_ready[2]), .s_beat(s_beat[2]),
    .m_valid(m_valid[2]), .m_ready(m_ready[2]), .m_beat(m_beat[2]), .cfg(cfg[2]));
  ad_ensemble #(.KIND(RM_IDENTITY), .D(D)) u_id (
    .clk, .rst, .s_valid(s_valid[3]), .s_ready(s_ready[3]), .s_beat(s_beat[3]),
    .m_valid(m_valid[3]), .m_ready(m_ready[3]), .m_beat(m_beat[3]), .cfg(cfg[3]));

  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always_ff @(posedge clk) for (int i = 0; i < 4; i++) m_ready[i] <= ($urandom % 3 != 0);

  task automatic wr(input int i, input int a, input int d);
    @(negedge clk); cfg[i].valid = 1; cfg[i].addr = 20'(a); cfg[i].data = d;
    @(negedge clk); cfg[i].valid = 0;
  endtask

  task automatic send(input int i, input real v, input logic last);
    @(negedge clk);
    s_valid[i] = 1; s_beat[i].data = r2f(v); s_beat[i].user = 0; s_beat[i].last = last;
    @(posedge clk);
    while (!s_ready[i]) @(posedge clk);
    @(negedge clk); s_valid[i] = 0;
  endtask

  // expected outputs per partition
  real  exp_q[4][$];
  logic exp_l[4][$];
  logic exp_last[4][$];
  logic [31:0] exp_bits[$];
  int nout[4];

  always @(posedge clk) begin
    for (int i = 0; i < 4; i++)
      if (!rst && m_valid[i] && m_ready[i]) begin
        nout[i]++;
        if (i == 3) begin
          checks++;
          if (exp_bits.size() == 0 || m_beat[3].data !== exp_bits[0]) begin
            failures++; $display("FAIL identity beat");
          end
          if (exp_bits.size() != 0) void'(exp_bits.pop_front());
        end else if (exp_q[i].size() == 0) begin
          checks++; failures++; $display("FAIL unexpected output on %0d", i);
        end else begin
          real got;
          got = f2r(m_beat[i].data);
          checks += 3;
          if (got - exp_q[i][0] > 0.001 || exp_q[i][0] - got > 0.001) begin
            failures++; $display("FAIL part %0d score %f exp %f", i, got, exp_q[i][0]);
          end
          if (m_beat[i].user !== exp_l[i][0]) begin failures++; $display("FAIL part %0d label", i); end
          if (m_beat[i].last !== exp_last[i][0]) begin failures++; $display("FAIL part %0d last", i); end
          void'(exp_q[i].pop_front()); void'(exp_l[i].pop_front()); void'(exp_last[i].pop_front());
        end
      end
  end

  // ---- Loda with a reference model ----
  int prj[3][D];
  int hist[3][$];
  task automatic run_loda();
    int thr = 3 * 65536 / 2;
    wr(0, 0, thr);
    for (int r = 0; r < 3; r++) begin
      for (int d = 0; d < D; d++) begin
        prj[r][d] = int'($urandom % 131072) - 65536;
        wr(0, 32'h8000 | (r << 9) | d, prj[r][d]);
      end
      wr(0, 32'h8000 | (r << 9) | D, -3 * 65536);
      wr(0, 32'h8000 | (r << 9) | (D + 1), 65536 * BINS / 6);
    end
    for (int t = 0; t < 60; t++) begin
      int xv[D];
      real avg;
      logic lst;
      for (int d = 0; d < D; d++) xv[d] = (int'($urandom % 5) - 2) * 32768;
      avg = 0.0;
      for (int r = 0; r < 3; r++) begin
        int acc, b, c;
        acc = 0;
        for (int d = 0; d < D; d++) acc += qm(xv[d], prj[r][d]);
        b = qm(acc + 3 * 65536, 65536 * BINS / 6) >>> 16;
        if (b < 0) b = 0;
        if (b > BINS - 1) b = BINS - 1;
        c = 0;
        for (int i = 0; i < hist[r].size(); i++) if (hist[r][i] == b) c++;
        hist[r].push_back(b);
        if (hist[r].size() > W) void'(hist[r].pop_front());
        avg += log2r(real'(W)) - log2r(real'(c == 0 ? 1 : c));
      end
      avg = avg / 3.0;
      lst = $urandom % 2;
      exp_q[0].push_back(avg);
      exp_l[0].push_back(avg > 1.5);
      exp_last[0].push_back(lst);
      for (int d = 0; d < D; d++) send(0, real'(xv[d]) / 65536.0, (d == D - 1) ? lst : 1'b0);
    end
  endtask

  // ---- RS-Hash / xStream with a repeated sample ----
  task automatic run_repeat(input int i, input int mult);
    for (int r = 0; r < 2; r++)
      for (int w = 0; w < 480 && w < ((i == 1) ? D + 1 : D * K + 3 * K); w++)
        wr(i, 32'h8000 | (r << 9) | w, int'($urandom % 131072) - 65536);
    if (i == 1)
      for (int d = 0; d < D; d++) begin
        wr(1, 32'h100 + d, -2 * 65536);
        wr(1, 32'h200 + d, 65536 / 4);
      end
    wr(i, 0, -2 * 65536);                                  // threshold -2.0
    for (int t = 0; t < 14; t++) begin
      int n;
      real e;
      n = (t < W) ? t : W;
      e = -log2r(1.0 + real'(mult * n));
      exp_q[i].push_back(e);
      exp_l[i].push_back(e > -2.0);
      exp_last[i].push_back(1'b1);
      send(i, 0.5, 0); send(i, -1.25, 0); send(i, 1.0, 1);
    end
  endtask

  task automatic run_identity();
    for (int t = 0; t < 30; t++) begin
      real v;
      v = real'(int'($urandom % 1000) - 500) / 64.0;
      exp_bits.push_back(r2f(v));
      send(3, v, 0);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) begin
      s_valid[i] = 0; s_beat[i] = '0; cfg[i] = '0; nout[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    fork
      run_loda();
      run_repeat(1, 1);
      run_repeat(2, 2);
      run_identity();
    join
    repeat (200) @(negedge clk);
    checks++;
    if (nout[0] != 60 || nout[1] != 14 || nout[2] != 14 || nout[3] != 30) begin
      failures++; $display("FAIL output counts %0d %0d %0d %0d", nout[0], nout[1], nout[2], nout[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
