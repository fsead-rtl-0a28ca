// rshash_subdetector: one RS-Hash sub-detector (normalise and project, w
// hash functions, count-min-sketch sliding window, score).
//
// On start the D features of x are taken one per cycle (D cycles). Each is
// normalised with the ensemble-wide min and reciprocal range, shifted by
// this sub-detector's alpha[dim] and scaled by 1/f, and the integer part of
// the result is the grid key of that dimension:
//   key[dim] = floor(((x[dim] - nmin[dim]) * nscale[dim] + alpha[dim]) * inv_f).
// In the same cycle the key is absorbed by CMS_W Jenkins hashes running in
// parallel, row r seeded with r (1-based). The cycle after the last
// dimension each row's hash code (mod MOD) selects a count in that row's
// sliding window; the score is -log2(1 + min over rows of the counts), and
// the codes are inserted into the window. done rises D+2 edges after start
// and holds score until ack. Parameter memory: word j < D alpha[j], word D
// inv_f. The fused projection/hash loop, reciprocals and memory layout are
// this design's choices; the dataflow and score follow RS-Hash as given.
module rshash_subdetector
  import fsead_pkg::*;
#(
  parameter int D     = 21,
  parameter int CMS_W = 2,
  parameter int MOD   = 128,
  parameter int W     = 128
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         start,
  input  q16_t [D-1:0] x,
  input  q16_t [D-1:0] nmin,
  input  q16_t [D-1:0] nscale,
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
  localparam int LD = W + 2;
  localparam int DB = (D > 1) ? $clog2(D) : 1;

  typedef enum logic [1:0] {S_IDLE, S_PROJ, S_SCORE, S_DONE} state_e;
  state_e state;

  q16_t alpha [D];
  q16_t inv_f;
  logic [DB-1:0] dim;
  logic [31:0]   key;
  logic [CMS_W-1:0][CB-1:0] code;
  logic [CMS_W-1:0][NB-1:0] cnt;
  logic [NB-1:0] minv;
  q16_t log_v;

  always_ff @(posedge clk)
    if (pwe) begin
      if (32'(paddr) < D)       alpha[paddr[DB-1:0]] <= q16_t'(pdata);
      else if (32'(paddr) == D) inv_f        <= q16_t'(pdata);
    end

  assign key = qfloor(qmul(qmul(x[dim] - nmin[dim], nscale[dim]) + alpha[dim], inv_f));

  for (genvar r = 0; r < CMS_W; r++) begin : g_row
    jenkins_hash #(.MOD(MOD)) u_hash (
      .clk, .init(state == S_IDLE && start), .seed(32'(r + 1)),
      .en(state == S_PROJ), .key, .code(code[r]));
  end

  sliding_window #(.ROWS(CMS_W), .NCODES(MOD), .W(W)) u_win (
    .clk, .rst, .code, .upd(state == S_SCORE), .count(cnt));

  always_comb begin
    minv = cnt[0];
    for (int r = 1; r < CMS_W; r++)
      if (cnt[r] < minv) minv = cnt[r];
  end

  log2_lut #(.DEPTH(LD)) u_log (.idx($clog2(LD)'(minv) + 1'b1), .log2_q(log_v));

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      dim   <= '0;
      score <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          dim   <= '0;
          state <= S_PROJ;
        end
        S_PROJ: begin
          if (dim == DB'(D - 1)) state <= S_SCORE;
          else dim <= dim + 1'b1;
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
