// tb_axis_switch: four slaves, five masters. Routes are set, including two
// masters naming the same slave; each slave sends a numbered sequence and
// each master must receive exactly the sequence of the slave it owns, with
// the lowest-numbered master winning a conflict and the loser silent.
// Masters stall at random; rerouting at run time is checked as well.
module tb_axis_switch;
  import fsead_pkg::*;
  localparam int NS = 4, NM = 5;
  logic clk = 0, rst = 1;
  logic [NS-1:0] s_valid, s_ready;
  axis_beat_t [NS-1:0] s_beat;
  logic [NM-1:0] m_valid, m_ready;
  axis_beat_t [NM-1:0] m_beat;
  cfg_wr_t cfg;
  int checks = 0, failures = 0;

  axis_switch #(.NS(NS), .NM(NM)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int a, input logic [31:0] d);
    @(negedge clk); cfg.valid = 1; cfg.addr = 20'(a); cfg.data = d;
    @(negedge clk); cfg.valid = 0;
  endtask

  int route[NM];          // expected owning slave, -1 for none
  int seq_tx[NS], seq_rx[NM];
  int nrx[NM];

  // sources: slave s sends {s, seq}
  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid <= '0;
      for (int s = 0; s < NS; s++) seq_tx[s] <= 0;
    end else
      for (int s = 0; s < NS; s++) begin
        if (s_valid[s] && s_ready[s]) begin
          s_valid[s] <= 0;
          seq_tx[s] <= seq_tx[s] + 1;
        end
        if (!s_valid[s] || s_ready[s]) begin
          s_valid[s] <= ($urandom % 2);
          s_beat[s].data <= 32'((s << 16) | (seq_tx[s] + ((s_valid[s] && s_ready[s]) ? 1 : 0)));
          s_beat[s].user <= 0; s_beat[s].last <= 0;
        end
      end
  end

  bit pause = 1;
  always_ff @(posedge clk) m_ready <= pause ? '0 : NM'($urandom);

  always @(posedge clk)
    if (!rst)
      for (int m = 0; m < NM; m++)
        if (m_valid[m] && m_ready[m]) begin
          nrx[m]++;
          checks++;
          if (route[m] < 0 || m_beat[m].data[31:16] != 16'(route[m])) begin
            failures++; $display("FAIL master %0d got beat from slave %0d", m, m_beat[m].data[31:16]);
          end else if (int'(m_beat[m].data[15:0]) < seq_rx[m]) begin
            failures++; $display("FAIL master %0d out of order", m);
          end
          seq_rx[m] = int'(m_beat[m].data[15:0]) + 1;
        end

  initial begin
    cfg = '0;
    for (int m = 0; m < NM; m++) begin route[m] = -1; nrx[m] = 0; seq_rx[m] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // m0<-s2, m1<-s0, m2<-s2 (loses to m0), m3 disabled, m4<-s1 ; s3 unrouted
    wr(0, 2); wr(1, 0); wr(2, 2); wr(3, 32'h8000_0003); wr(4, 1);
    route = '{2, 0, -1, -1, 1};
    @(negedge clk); pause = 0;
    repeat (300) @(negedge clk);
    checks++;
    if (nrx[0] == 0 || nrx[1] == 0 || nrx[4] == 0 || nrx[2] != 0 || nrx[3] != 0) begin
      failures++; $display("FAIL counts %0d %0d %0d %0d %0d", nrx[0], nrx[1], nrx[2], nrx[3], nrx[4]);
    end
    checks++;
    if (s_ready[3] !== 1'b0) begin failures++; $display("FAIL unrouted slave ready"); end
    // reroute: disable m0, so m2 now owns s2; m3 takes s3
    pause = 1;
    repeat (2) @(negedge clk);
    wr(0, 32'h8000_0000);
    wr(3, 3);
    route = '{-1, 0, 2, 3, 1};
    for (int m = 0; m < NM; m++) nrx[m] = 0;
    seq_rx[2] = 0; seq_rx[3] = 0;
    @(negedge clk); pause = 0;
    repeat (300) @(negedge clk);
    checks++;
    if (nrx[0] != 0 || nrx[2] == 0 || nrx[3] == 0) begin
      failures++; $display("FAIL reroute counts %0d %0d %0d", nrx[0], nrx[2], nrx[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
