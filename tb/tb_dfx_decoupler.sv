// tb_dfx_decoupler: with decouple low every signal must pass through; with
// it high the partition-facing valids and readies, the configuration strobe
// and reset must show isolation whatever the other side drives.
module tb_dfx_decoupler;
  import fsead_pkg::*;
  logic clk = 0, rst = 1, decouple, decouple_status, rp_rst;
  logic [0:0] s_valid, s_ready, rp_s_valid, rp_s_ready, rp_m_valid, rp_m_ready, m_valid, m_ready;
  axis_beat_t [0:0] s_beat, rp_s_beat, rp_m_beat, m_beat;
  cfg_wr_t cfg, rp_cfg;
  int checks = 0, failures = 0;
  dfx_decoupler #(.NI(1), .NO(1)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    decouple = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      decouple = (t >= 100) ? ($urandom % 2) : 1'b0;
      s_valid = $urandom; rp_s_ready = $urandom; rp_m_valid = $urandom; m_ready = $urandom;
      s_beat = $urandom; rp_m_beat = $urandom;
      cfg.valid = $urandom; cfg.addr = $urandom; cfg.data = $urandom;
      #1;
      if (!decouple) begin
        chk(rp_s_valid == s_valid && s_ready == rp_s_ready, "input pass");
        chk(m_valid == rp_m_valid && rp_m_ready == m_ready, "output pass");
        chk(rp_s_beat == s_beat && m_beat == rp_m_beat, "data pass");
        chk(rp_cfg == cfg && rp_rst == 1'b0, "cfg pass");
      end else begin
        chk(rp_s_valid == 0 && s_ready == 0, "input isolated");
        chk(m_valid == 0 && rp_m_ready == 0, "output isolated");
        chk(rp_cfg.valid == 0 && rp_rst == 1, "cfg and reset isolated");
      end
      @(posedge clk); #1;
      chk(decouple_status == decouple, "status");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
