// tb_fsead_top: end-to-end test of the composable fabric at reduced size (D=3, W=8, two sub-detectors per partition).
//
// Every sub-detector of every partition is loaded with random parameters
// over the configuration bus. Each partition is always fed the same sample,
// so that the n-th score of a partition is known exactly whatever the
// parameters: every window count equals min(n, W), giving
//   Loda    log2 W - log2 max(n, 1)
//   RS-Hash -log2(1 + n)
//   xStream -log2(1 + 2n)
// averaged over the ensemble. The test walks through the topologies of the
// fabric and checks every score and label that comes out:
//   A  seven independent channels: Switch-1 routes RP-i to output i;
//   B  one mixed ensemble: RP-1..4 into COMBO1, COMBO1 and RP-5..7 into
//      COMBO3, COMBO3 to output 0 through both switches; a second master
//      naming the same slave must stay silent (lowest number wins);
//   B2 three applications at once: RP-1..3 into COMBO1 (average, or),
//      RP-4,5 into COMBO2 (maximum, or), RP-6,7 into COMBO3 (average,
//      majority vote), to outputs 0, 1 and 2;
//   C  RP-1 decoupled (its input must stall), then released, after which its
//      window must start empty again; then channel A once more.
// Output channels stall at random. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
module tb_fsead_top;
  import fsead_pkg::*;
  import tb_pkg::*;
  localparam int D = 3, W = 8, NSAMP = 12;
  localparam rm_kind_e KINDS [7] = '{RM_LODA, RM_LODA, RM_RSHASH, RM_RSHASH,
                                     RM_XSTREAM, RM_XSTREAM, RM_XSTREAM};
  localparam int RS [7] = '{2, 2, 2, 2, 2, 2, 2};
  localparam int K = 4;
  localparam int NPW_L = D + 2, NPW_R = D + 1, NPW_X = D * K + 3 * K;

  logic clk = 0, rst = 1;
  logic       [6:0] in_valid, in_ready, out_valid, out_ready;
  axis_beat_t [6:0] in_beat, out_beat;
  logic cfg_valid;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data;
  logic [9:0] decouple_status;
  int checks = 0, failures = 0;

  fsead_top #(.R_LODA(2), .R_RSHASH(2), .R_XSTREAM(2), .D(3), .W(8), .BINS(4), .MOD(16), .K(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(input int blk, input int a, input logic [31:0] d);
    @(negedge clk);
    cfg_valid = 1; cfg_addr = 20'((blk << 16) | a); cfg_data = d;
    @(negedge clk);
    cfg_valid = 0;
  endtask

  // ---- mechanism counters ----
  int n_direct = 0, n_combo = 0, n_cascade = 0, n_conflict_ok = 0, n_stall = 0;
  int n_parallel = 0, n_decouple = 0, n_label1 = 0, n_label0 = 0, n_restart = 0;

  // ---- per-partition sample count since its last reset ----
  int nseen [7];
  real thr_r [7];

  function automatic real part_score(input int p, input int n);
    int m;
    m = (n < W) ? n : W;
    case (KINDS[p])
      RM_LODA:    return log2r(real'(W)) - log2r(real'(m == 0 ? 1 : m));
      RM_RSHASH:  return -log2r(1.0 + real'(m));
      default:    return -log2r(1.0 + 2.0 * real'(m));
    endcase
  endfunction

  // ---- expected beats per output channel ----
  real  exp_q [7][$];
  logic exp_l [7][$];
  int   nout [7];
  int   nout0_a, nout1_a;
  int   nout_b [3];

  always_ff @(posedge clk) out_ready <= 7'($urandom) | 7'($urandom);

  always @(posedge clk)
    if (!rst)
      for (int o = 0; o < 7; o++) begin
        if (out_valid[o] && !out_ready[o]) n_stall++;
        if (out_valid[o] && out_ready[o]) begin
          real got;
          nout[o]++;
          got = f2r(out_beat[o].data);
          checks++;
          if (exp_q[o].size() == 0) begin
            failures++; $display("FAIL unexpected beat on output %0d", o);
          end else begin
            if (got - exp_q[o][0] > 0.002 || exp_q[o][0] - got > 0.002) begin
              failures++; $display("FAIL output %0d score %f exp %f", o, got, exp_q[o][0]);
            end
            checks++;
            if (out_beat[o].user !== exp_l[o][0]) begin
              failures++; $display("FAIL output %0d label", o);
            end
            if (out_beat[o].user) n_label1++; else n_label0++;
            void'(exp_q[o].pop_front()); void'(exp_l[o].pop_front());
          end
        end
      end

  // ---- sample source for one partition ----
  real sample [D];
  task automatic send_sample(input int p);
    for (int d = 0; d < D; d++) begin
      @(negedge clk);
      in_valid[p] = 1;
      in_beat[p].data = r2f(sample[d]); in_beat[p].user = 0; in_beat[p].last = (d == D - 1);
      @(posedge clk);
      while (!in_ready[p]) @(posedge clk);
      @(negedge clk);
      in_valid[p] = 0;
    end
  endtask

  task automatic wait_drained(input int cycles);
    int idle;
    idle = 0;
    while (idle < cycles) begin
      @(negedge clk);
      idle++;
      for (int o = 0; o < 7; o++) if (exp_q[o].size() != 0) idle = 0;
    end
  endtask

  // channel topology (A): each partition to its own output
  task automatic route_direct();
    for (int m = 0; m < 7; m++) wr(CFG_BLK_SW1, m, 32'(m));
    for (int m = 7; m < 14; m++) wr(CFG_BLK_SW1, m, 32'h8000_0000);
    for (int m = 0; m < 15; m++) wr(CFG_BLK_SW2, m, 32'h8000_0000);
  endtask

  task automatic run_direct(input int nsamp);
    for (int t = 0; t < nsamp; t++) begin
      for (int p = 0; p < 7; p++) begin
        real s;
        s = part_score(p, nseen[p]);
        exp_q[p].push_back(s);
        exp_l[p].push_back(s > thr_r[p]);
        nseen[p]++;
      end
      fork
        send_sample(0); send_sample(1); send_sample(2); send_sample(3);
        send_sample(4); send_sample(5); send_sample(6);
      join
    end
    wait_drained(100);
    n_direct++;
  endtask

  initial begin
    cfg_valid = 0; cfg_addr = '0; cfg_data = '0;
    in_valid = '0; in_beat = '0;
    for (int d = 0; d < D; d++) sample[d] = real'(int'($urandom % 256) - 128) / 32.0;
    for (int p = 0; p < 7; p++) nseen[p] = 0;
    for (int o = 0; o < 7; o++) nout[o] = 0;
    repeat (4) @(negedge clk);
    rst = 0;

    // ---- load every sub-detector with random parameters ----
    for (int p = 0; p < 7; p++) begin
      int npw;
      npw = (KINDS[p] == RM_LODA) ? NPW_L : (KINDS[p] == RM_RSHASH) ? NPW_R : NPW_X;
      for (int r = 0; r < RS[p]; r++)
        for (int w = 0; w < npw; w++) begin
          int v;
          v = int'($urandom % 131072) - 65536;
          if (KINDS[p] == RM_LODA && w == D)     v = -8 * 65536;       // loda_min
          if (KINDS[p] == RM_LODA && w == D + 1) v = 65536;            // bins per unit
          if (KINDS[p] == RM_RSHASH && w == D)   v = 4 * 65536;        // 1/f
          if (KINDS[p] == RM_XSTREAM && w >= D * K + K) v = 65536 << ((w - D * K - K) / K);
          wr(CFG_BLK_RP0 + p, 32'h8000 | (r << 9) | w, 32'(v));
        end
      if (KINDS[p] == RM_RSHASH)
        for (int d = 0; d < D; d++) begin
          wr(CFG_BLK_RP0 + p, 32'h100 + d, -4 * 65536);
          wr(CFG_BLK_RP0 + p, 32'h200 + d, 65536 / 8);
        end
      thr_r[p] = (KINDS[p] == RM_LODA) ? 1.0 : (KINDS[p] == RM_RSHASH) ? -2.0 : -3.0;
      wr(CFG_BLK_RP0 + p, 0, r2q(thr_r[p]));
    end

    // ---- A: seven independent channels ----
    route_direct();
    run_direct(NSAMP);

    // ---- B: mixed ensemble through COMBO1 and COMBO3 ----
    for (int m = 0; m < 14; m++) wr(CFG_BLK_SW1, m, 32'h8000_0000);
    for (int i = 0; i < 7; i++) wr(CFG_BLK_SW1, 7 + i, 32'(i));     // RP-i -> Switch-2 slave i
    wr(CFG_BLK_SW1, 0, 32'd9);                                     // COMBO3 (via Switch-2 M14) -> out 0
    wr(CFG_BLK_SW1, 1, 32'd9);                                     // conflicting master: must lose
    for (int m = 0; m < 15; m++) wr(CFG_BLK_SW2, m, 32'h8000_0000);
    for (int i = 0; i < 4; i++) wr(CFG_BLK_SW2, i, 32'(i));         // RP-1..4 -> COMBO1 in 0..3
    wr(CFG_BLK_SW2, 8, 32'd7);                                      // COMBO1 -> COMBO3 in 0
    for (int i = 0; i < 3; i++) wr(CFG_BLK_SW2, 9 + i, 32'(4 + i)); // RP-5..7 -> COMBO3 in 1..3
    wr(CFG_BLK_SW2, 14, 32'd9);                                     // COMBO3 -> Switch-1 slave 9
    wr(CFG_BLK_COMBO0 + 0, 0, 0);  wr(CFG_BLK_COMBO0 + 0, 1, 32'hf); // average, or
    wr(CFG_BLK_COMBO0 + 2, 0, 0);  wr(CFG_BLK_COMBO0 + 2, 1, 32'hf);
    nout0_a = nout[0]; nout1_a = nout[1];
    for (int t = 0; t < NSAMP; t++) begin
      real s[7], c1, c3;
      logic l[7], lc1, lc3;
      for (int p = 0; p < 7; p++) begin
        s[p] = part_score(p, nseen[p]);
        l[p] = s[p] > thr_r[p];
        nseen[p]++;
      end
      c1  = (s[0] + s[1] + s[2] + s[3]) / 4.0;
      lc1 = l[0] | l[1] | l[2] | l[3];
      c3  = (c1 + s[4] + s[5] + s[6]) / 4.0;
      lc3 = lc1 | l[4] | l[5] | l[6];
      exp_q[0].push_back(c3);
      exp_l[0].push_back(lc3);
      fork
        send_sample(0); send_sample(1); send_sample(2); send_sample(3);
        send_sample(4); send_sample(5); send_sample(6);
      join
    end
    wait_drained(100);
    n_combo = nout[0] - nout0_a;
    n_cascade = (n_combo > 0) ? 1 : 0;
    checks++;
    if (nout[1] != nout1_a) begin failures++; $display("FAIL conflicting master received data"); end
    else n_conflict_ok++;

    // ---- B2: three applications at once: RP-1..3 -> COMBO1 (average, or),
    //      RP-4,5 -> COMBO2 (maximum, or), RP-6,7 -> COMBO3 (average, vote) ----
    for (int m = 0; m < 14; m++) wr(CFG_BLK_SW1, m, 32'h8000_0000);
    for (int i = 0; i < 7; i++) wr(CFG_BLK_SW1, 7 + i, 32'(i));
    for (int j = 0; j < 3; j++) wr(CFG_BLK_SW1, j, 32'(7 + j));     // COMBOj+1 -> out j
    for (int m = 0; m < 15; m++) wr(CFG_BLK_SW2, m, 32'h8000_0000);
    for (int i = 0; i < 3; i++) wr(CFG_BLK_SW2, i, 32'(i));         // COMBO1 in 0..2
    wr(CFG_BLK_SW2, 4, 32'd3);  wr(CFG_BLK_SW2, 5, 32'd4);          // COMBO2 in 0..1
    wr(CFG_BLK_SW2, 8, 32'd5);  wr(CFG_BLK_SW2, 9, 32'd6);          // COMBO3 in 0..1
    for (int j = 0; j < 3; j++) wr(CFG_BLK_SW2, 12 + j, 32'(7 + j)); // returns
    wr(CFG_BLK_COMBO0 + 0, 0, 0);  wr(CFG_BLK_COMBO0 + 0, 1, 32'b0111);
    wr(CFG_BLK_COMBO0 + 1, 0, 32'd1);  wr(CFG_BLK_COMBO0 + 1, 1, 32'b0011);
    wr(CFG_BLK_COMBO0 + 2, 0, 32'd4);  wr(CFG_BLK_COMBO0 + 2, 1, 32'b0011);
    for (int o = 0; o < 3; o++) nout_b[o] = nout[o];
    for (int t = 0; t < NSAMP; t++) begin
      real s[7];
      logic l[7];
      for (int p = 0; p < 7; p++) begin
        s[p] = part_score(p, nseen[p]);
        l[p] = s[p] > thr_r[p];
        nseen[p]++;
      end
      exp_q[0].push_back((s[0] + s[1] + s[2]) / 3.0);
      exp_l[0].push_back(l[0] | l[1] | l[2]);
      exp_q[1].push_back((s[3] > s[4]) ? s[3] : s[4]);
      exp_l[1].push_back(l[3] | l[4]);
      exp_q[2].push_back((s[5] + s[6]) / 2.0);
      exp_l[2].push_back(l[5] & l[6]);
      fork
        send_sample(0); send_sample(1); send_sample(2); send_sample(3);
        send_sample(4); send_sample(5); send_sample(6);
      join
    end
    wait_drained(100);
    for (int o = 0; o < 3; o++) if (nout[o] - nout_b[o] == NSAMP) n_parallel++;

    // ---- C: decouple RP-1, release it, and run the channels again ----
    route_direct();
    wr(CFG_BLK_DECOUPLE, 0, 32'h1);
    repeat (3) @(negedge clk);
    checks++;
    if (decouple_status[0] !== 1'b1 || in_ready[0] !== 1'b0) begin
      failures++; $display("FAIL RP-1 not isolated");
    end else n_decouple++;
    wr(CFG_BLK_DECOUPLE, 0, 32'h0);
    nseen[0] = 0;                          // RP-1 was reset: its window is empty
    wr(CFG_BLK_RP0, 0, r2q(thr_r[0]));     // threshold register was reset too
    run_direct(2);
    n_restart++;

    // ---- mechanism coverage ----
    $display("mechanisms: direct=%0d combo=%0d cascade=%0d conflict=%0d parallel=%0d stall=%0d decouple=%0d restart=%0d label1=%0d label0=%0d",
             n_direct, n_combo, n_cascade, n_conflict_ok, n_parallel, n_stall, n_decouple, n_restart, n_label1, n_label0);
    if (n_direct == 0)      begin failures++; $display("FAIL no direct channel run"); end
    if (n_combo == 0)       begin failures++; $display("FAIL no combo output"); end
    if (n_cascade == 0)     begin failures++; $display("FAIL no combo cascade"); end
    if (n_parallel != 3)    begin failures++; $display("FAIL parallel combos delivered %0d of 3 streams", n_parallel); end
    if (n_conflict_ok == 0) begin failures++; $display("FAIL no switch conflict"); end
    if (n_stall == 0)       begin failures++; $display("FAIL no output stall"); end
    if (n_decouple == 0)    begin failures++; $display("FAIL no decouple"); end
    if (n_label1 == 0 || n_label0 == 0) begin failures++; $display("FAIL labels not both seen"); end
    checks += 8;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
