// tb_axis_reg_slice: random traffic with random stalls on both sides must
// arrive complete and in order; with the sink always ready a continuous
// burst must pass at one beat per clock after one cycle of latency.
module tb_axis_reg_slice;
  import fsead_pkg::*;
  logic clk = 0, rst = 1;
  logic s_valid, s_ready, m_valid, m_ready;
  axis_beat_t s_beat, m_beat;
  int checks = 0, failures = 0;
  axis_reg_slice dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int tx = 0, rx = 0;
  bit random_mode = 1;
  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid <= 0; s_beat <= '0;
    end else begin
      if (s_valid && s_ready) tx <= tx + 1;
      if (!s_valid || s_ready) begin
        s_valid <= random_mode ? ($urandom % 2) : 1'b1;
        s_beat  <= '{data: 32'(tx + ((s_valid && s_ready) ? 1 : 0)), user: 1'b0, last: 1'b0};
      end
    end
  end
  always_ff @(posedge clk) m_ready <= random_mode ? ($urandom % 2) : 1'b1;

  always @(posedge clk)
    if (!rst && m_valid && m_ready) begin
      checks++;
      if (m_beat.data != 32'(rx)) begin failures++; $display("FAIL got %0d exp %0d", m_beat.data, rx); end
      rx++;
    end

  initial begin
    int r0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (2000) @(negedge clk);
    random_mode = 0;
    repeat (20) @(negedge clk);
    r0 = rx;
    repeat (100) @(negedge clk);
    checks++;
    if (rx - r0 != 100) begin failures++; $display("FAIL throughput %0d beats in 100 cycles", rx - r0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
