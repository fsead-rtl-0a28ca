// loda_subdetector: one Loda sub-detector (projection, histogram, sliding
// window, score).
//
// On start the sample vector x (D features, Q16.16) is projected onto this
// sub-detector's random direction prj, one multiply-accumulate per cycle
// (D cycles). The projection is mapped to a histogram bin,
//   bin = floor((prj_x - loda_min) * lscale),  lscale = BINS / (max - min),
// clamped to 0 .. BINS-1. The count c of that bin over the last W samples is
// read from a one-row sliding window, the score -log2(c/W) = log2 W - log2 c
// is formed through the log2 table (c = 0 is scored as c = 1) and the bin is
// inserted into the window. done rises D+3 clock edges after the edge that
// samples start, and stays up,
// holding score, until ack. start is taken only while idle (busy low).
// Parameter memory (loaded by the host, not reset): word j < D is prj[j],
// word D is loda_min, word D+1 is lscale. The projection, bin formula and
// score follow the Loda description; the reciprocal lscale, the clamp and
// the memory layout are this design's choices.
module loda_subdetector
  import fsead_pkg::*;
#(
  parameter int D    = 21,
  parameter int BINS = 20,
  parameter int W    = 128
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
  localparam int BB = (BINS > 1) ? $clog2(BINS) : 1;
  localparam int NB = $clog2(W + 1);
  localparam int LD = W + 2;
  localparam int DB = (D > 1) ? $clog2(D) : 1;

  typedef enum logic [2:0] {S_IDLE, S_PROJ, S_BIN, S_SCORE, S_DONE} state_e;
  state_e state;

  q16_t prj [D];
  q16_t lmin, lscale;
  q16_t acc;
  logic [DB-1:0] dim;
  logic [BB-1:0] bin;
  logic [NB-1:0] cnt;
  logic [$clog2(LD)-1:0] lidx;
  q16_t log_c, log_w, t;
  logic signed [31:0] tb;

  // parameter memory
  always_ff @(posedge clk)
    if (pwe) begin
      if (32'(paddr) < D)       prj[paddr[DB-1:0]] <= q16_t'(pdata);
      else if (32'(paddr) == D) lmin       <= q16_t'(pdata);
      else if (32'(paddr) == D + 1) lscale <= q16_t'(pdata);
    end

  sliding_window #(.ROWS(1), .NCODES(BINS), .W(W)) u_win (
    .clk, .rst, .code(bin), .upd(state == S_SCORE), .count(cnt));

  assign lidx = (cnt == '0) ? $clog2(LD)'(1) : $clog2(LD)'(cnt);
  log2_lut #(.DEPTH(LD)) u_log_c (.idx(lidx), .log2_q(log_c));
  log2_lut #(.DEPTH(LD)) u_log_w (.idx($clog2(LD)'(W)), .log2_q(log_w));

  always_comb begin
    t  = qmul(acc - lmin, lscale);
    tb = $signed(qfloor(t));
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      acc   <= '0;
      dim   <= '0;
      bin   <= '0;
      score <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          acc   <= '0;
          dim   <= '0;
          state <= S_PROJ;
        end
        S_PROJ: begin
          acc <= acc + qmul(x[dim], prj[dim]);
          if (dim == DB'(D - 1)) state <= S_BIN;
          else dim <= dim + 1'b1;
        end
        S_BIN: begin
          if (tb < 0)                 bin <= '0;
          else if (tb >= BINS)        bin <= BB'(BINS - 1);
          else                        bin <= BB'(tb);
          state <= S_SCORE;
        end
        S_SCORE: begin
          score <= log_w - log_c;
          state <= S_DONE;
        end
        S_DONE: if (ack) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
