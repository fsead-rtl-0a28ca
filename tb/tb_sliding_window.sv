// tb_sliding_window: random codes on two rows; before each insertion the
// counts are compared with the number of occurrences of the code among the
// last W codes kept in a reference history.
module tb_sliding_window;
  localparam int ROWS = 2, NCODES = 8, W = 5;
  logic clk = 0, rst = 1, upd;
  logic [ROWS-1:0][2:0] code;
  logic [ROWS-1:0][2:0] count;
  int checks = 0, failures = 0;
  int hist [ROWS][$];
  sliding_window #(.ROWS(ROWS), .NCODES(NCODES), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    upd = 0; code = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) code[r] = 3'($urandom % (r == 0 ? 3 : 8));
      upd = ($urandom % 4 != 0);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        int c;
        c = 0;
        for (int i = 0; i < hist[r].size(); i++) if (hist[r][i] == int'(code[r])) c++;
        checks++;
        if (int'(count[r]) != c) begin
          failures++;
          $display("FAIL t=%0d row %0d code %0d got %0d exp %0d", t, r, code[r], count[r], c);
        end
        if (upd) begin
          hist[r].push_back(int'(code[r]));
          if (hist[r].size() > W) void'(hist[r].pop_front());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
