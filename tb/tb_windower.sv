// tb_windower: random feature stream with random consumer stalls; every
// assembled vector and its TLAST is compared with the features sent, and
// the one-cycle latency after the last feature is checked.
module tb_windower;
  import fsead_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst = 1;
  logic s_valid, s_ready, s_last, m_valid, m_ready, m_last;
  q16_t s_data;
  q16_t [D-1:0] m_vec;
  int checks = 0, failures = 0;
  q16_t sent [$];
  logic lasts [$];

  windower #(.D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // producer
  int nsent = 0;
  always_ff @(posedge clk) begin
    if (rst) begin
      s_valid <= 0; s_data <= 0; s_last <= 0;
    end else begin
      if (s_valid && s_ready) begin
        sent.push_back(s_data);
        if ((nsent % D) == D - 1) lasts.push_back(s_last);
        nsent <= nsent + 1;
        s_valid <= 0;
      end
      if ((!s_valid || s_ready) && ($urandom % 4 != 0) && nsent < 400) begin
        s_valid <= 1;
        s_data  <= $urandom;
        s_last  <= $urandom % 2;
      end
    end
  end

  // consumer
  int nvec = 0;
  logic last_acc;
  always_ff @(posedge clk) begin
    if (rst) m_ready <= 0;
    else begin
      m_ready <= ($urandom % 3 != 0);
      last_acc <= s_valid && s_ready && ((nsent % D) == D - 1);
      if (last_acc) begin
        checks++;
        if (!m_valid) begin failures++; $display("FAIL vector not valid one cycle after last feature"); end
      end
      if (m_valid && m_ready) begin
        for (int j = 0; j < D; j++) begin
          checks++;
          if (m_vec[j] !== sent[j]) begin failures++; $display("FAIL vec %0d elem %0d", nvec, j); end
        end
        checks++;
        if (m_last !== lasts[0]) failures++;
        void'(lasts.pop_front());
        for (int j = 0; j < D; j++) void'(sent.pop_front());
        nvec++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    wait (nvec == 100);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
