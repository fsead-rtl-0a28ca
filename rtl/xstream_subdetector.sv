// xstream_subdetector: one xStream sub-detector (K-wide projection, per-row
// binning, w hash functions, count-min-sketch sliding window, score).
//
// On start the D features of x are consumed one per cycle; each updates all
// K projection accumulators at once, prj[k] += x[dim] * P[dim][k] (D
// cycles). In one further cycle every CMS row r (1..CMS_W) bins the K
// projections, bin[r][k] = floor((prj[k] + shift[k]) * scale[r][k]), and the
// row hashes are seeded with r. The K bins of each row are then absorbed by
// that row's Jenkins hash one per cycle (K cycles, rows in parallel). In the
// last cycle the row codes select counts c_r in the sliding window, the
// score is -log2(1 + min_r 2^r * c_r) and the codes are inserted. done
// rises D+K+3 edges after start and holds score until ack.
// Parameter memory: word dim*K+k is P[dim][k], word D*K+k is shift[k], word
// D*K+K+(r-1)*K+k is scale[r][k] (2^depth / range, chosen by the host).
// The binning formula is the simplest form of xStream's half-space binning
// and, like the memory layout, is this design's choice.
module xstream_subdetector
  import fsead_pkg::*;
#(
  parameter int D     = 21,
  parameter int K     = 20,
  parameter int CMS_W = 2,
  parameter int MOD   = 128,
  parameter int W     = 128
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  q16_t [D-1:0] x,
  output logic         busy,
  output logic         done,
  input  logic         ack,
  output q16_t         score,
  input  logic         pwe,
  input  logic [8:0]   paddr,
  input  logic [31:0]  pdata
);
  localparam int CB = $clog2(MOD);
  localparam int NB = $clog2(W + 1);
  localparam int MB = NB + CMS_W;
  localparam int LD = (W << CMS_W) + 2;
  localparam int DB = (D > 1) ? $clog2(D) : 1;
  localparam int KB = (K > 1) ? $clog2(K) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PROJ, S_BIN, S_HASH, S_SCORE, S_DONE} state_e;
  state_e state;

  q16_t [K-1:0] pm [D];          // projection matrix, one row of K words per dimension
  q16_t [K-1:0] shift;
  q16_t [K-1:0] scale [CMS_W];
  q16_t [K-1:0] prj;
  logic [31:0]  bin_q [CMS_W][K];
  logic [DB-1:0] dim;
  logic [KB-1:0] kk;
  logic [CMS_W-1:0][CB-1:0] code;
  logic [CMS_W-1:0][NB-1:0] cnt;
  logic [MB-1:0] minv, cand;
  q16_t log_v;

  always_ff @(posedge clk)
    if (pwe) begin
      for (int d = 0; d < D; d++)
        for (int k = 0; k < K; k++)
          if (32'(paddr) == d * K + k) pm[d][k] <= q16_t'(pdata);
      for (int k = 0; k < K; k++)
        if (32'(paddr) == D * K + k) shift[k] <= q16_t'(pdata);
      for (int r = 0; r < CMS_W; r++)
        for (int k = 0; k < K; k++)
          if (32'(paddr) == D * K + K + r * K + k) scale[r][k] <= q16_t'(pdata);
    end

  for (genvar r = 0; r < CMS_W; r++) begin : g_row
    jenkins_hash #(.MOD(MOD)) u_hash (
      .clk, .init(state == S_BIN), .seed(32'(r + 1)),
      .en(state == S_HASH), .key(bin_q[r][kk]), .code(code[r]));
  end

  sliding_window #(.ROWS(CMS_W), .NCODES(MOD), .W(W)) u_win (
    .clk, .rst, .code, .upd(state == S_SCORE), .count(cnt));

  always_comb begin
    minv = MB'(cnt[0]) << 1;
    for (int r = 1; r < CMS_W; r++) begin
      cand = MB'(cnt[r]) << (r + 1);
      if (cand < minv) minv = cand;
    end
  end

  log2_lut #(.DEPTH(LD)) u_log (.idx($clog2(LD)'(minv) + 1'b1), .log2_q(log_v));

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      dim   <= '0;
      kk    <= '0;
      prj   <= '0;
      score <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          prj   <= '0;
          dim   <= '0;
          state <= S_PROJ;
        end
        S_PROJ: begin
          for (int k = 0; k < K; k++) prj[k] <= prj[k] + qmul(x[dim], pm[dim][k]);
          if (dim == DB'(D - 1)) state <= S_BIN;
          else dim <= dim + 1'b1;
        end
        S_BIN: begin
          for (int r = 0; r < CMS_W; r++)
            for (int k = 0; k < K; k++)
              bin_q[r][k] <= qfloor(qmul(prj[k] + shift[k], scale[r][k]));
          kk    <= '0;
          state <= S_HASH;
        end
        S_HASH: begin
          if (kk == KB'(K - 1)) state <= S_SCORE;
          else kk <= kk + 1'b1;
        end
        S_SCORE: begin
          score <= -log_v;
          state <= S_DONE;
        end
        S_DONE: if (ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
