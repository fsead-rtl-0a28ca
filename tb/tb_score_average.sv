// tb_score_average: random score sets against the real-valued mean.
module tb_score_average;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int R = 5;
  q16_t [R-1:0] scores;
  q16_t avg;
  int checks = 0, failures = 0;
  score_average #(.R(R)) dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      real s, got;
      s = 0.0;
      for (int i = 0; i < R; i++) begin
        scores[i] = q16_t'(int'($urandom % (1 << 22)) - (1 << 21));
        s += q2r(scores[i]);
      end
      #1;
      got = q2r(avg);
      checks++;
      if (got - s / R > 0.0002 || s / R - got > 0.0002) begin
        failures++;
        $display("FAIL got %f exp %f", got, s / R);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
