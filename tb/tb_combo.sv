// tb_combo: random scores and labels on four inputs, arriving with random
// gaps; every combination of score method, label method and input mask is
// exercised and each output compared with a real-valued reference.
module tb_combo;
  import fsead_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst = 1;
  logic [3:0] s_valid, s_ready;
  axis_beat_t [3:0] s_beat;
  logic m_valid, m_ready;
  axis_beat_t m_beat;
  cfg_wr_t cfg;
  int checks = 0, failures = 0;

  combo #(.N_IN(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int a, input int d);
    @(negedge clk); cfg.valid = 1; cfg.addr = 20'(a); cfg.data = d;
    @(negedge clk); cfg.valid = 0;
  endtask

  real  wts[4];
  real  exp_q[$];
  logic exp_l[$];
  int   nout = 0;

  always @(posedge clk)
    if (!rst && m_valid && m_ready) begin
      real got;
      nout++;
      got = f2r(m_beat.data);
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected"); end
      else begin
        if (got - exp_q[0] > 0.001 || exp_q[0] - got > 0.001) begin
          failures++; $display("FAIL score %f exp %f", got, exp_q[0]);
        end
        if (m_beat.user !== exp_l[0]) begin failures++; $display("FAIL label"); end
        void'(exp_q.pop_front()); void'(exp_l.pop_front());
      end
    end

  always_ff @(posedge clk) m_ready <= ($urandom % 4 != 0);

  initial begin
    s_valid = '0; s_beat = '0; cfg = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 4; i++) begin
      wts[i] = real'(int'($urandom % 65536)) / 65536.0;
      wr(2 + i, int'(wts[i] * 65536.0));
      wts[i] = real'(int'(wts[i] * 65536.0)) / 65536.0;
    end
    for (int meth = 0; meth < 3; meth++)
      for (int lm = 0; lm < 2; lm++)
        for (int mask = 1; mask < 16; mask++) begin
          wr(0, meth | (lm << 2));
          wr(1, mask);
          for (int t = 0; t < 4; t++) begin
            real sc[4], e, mx;
            logic lb[4];
            int n, votes;
            logic [3:0] pend;
            n = 0; votes = 0; e = 0.0; mx = -1.0e9;
            for (int i = 0; i < 4; i++) begin
              sc[i] = real'(int'($urandom % 4096) - 2048) / 256.0;
              lb[i] = $urandom % 2;
              if (mask[i]) begin
                n++;
                votes += lb[i];
                if (meth == 2) e += wts[i] * sc[i]; else e += sc[i];
                if (sc[i] > mx) mx = sc[i];
              end
            end
            exp_q.push_back(meth == 1 ? mx : e / n);
            exp_l.push_back(lm ? (2 * votes > n) : (votes != 0));
            // present the inputs one by one with gaps
            pend = 4'(mask);
            for (int i = 0; i < 4; i++) begin
              s_beat[i].data = r2f(sc[i]); s_beat[i].user = lb[i]; s_beat[i].last = 0;
            end
            while (pend != 0) begin
              @(negedge clk);
              for (int i = 0; i < 4; i++)
                if (pend[i] && ($urandom % 2)) s_valid[i] = 1;
              @(posedge clk);
              if (s_ready != 0) pend = 0;
            end
            @(negedge clk);
            s_valid = '0;
          end
        end
    repeat (20) @(negedge clk);
    checks++;
    if (nout != 3 * 2 * 15 * 4) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
