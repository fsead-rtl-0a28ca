// ad_ensemble: the module loaded into one anomaly-detection partition: a
// float32 feature stream in, an ensemble of R identical sub-detectors of one
// kind, a float32 score stream out.
//
// Datapath: each input beat (one feature, float32) is converted to Q16.16
// and shifted into the windower. A complete vector is copied into a local
// register and all R sub-detectors start on it together; they have the same
// timing and run in lock-step, so the ensemble is the sub-detector loop
// spread out in space. While they work the windower already collects the
// next sample. When all are done the R scores are averaged, the average is
// compared with a threshold (label = average > threshold), and score (as
// float32) and label (TUSER) go out through a one-beat output register; the
// sub-detectors are released as soon as that register can take the result.
// The output TLAST is the TLAST of the sample's last feature.
//   KIND = RM_LODA / RM_RSHASH / RM_XSTREAM selects the sub-detector;
//   KIND = RM_IDENTITY is the bypass module that copies input beats to the
//   output unchanged.
// Throughput per sample: max(D input beats, D+3 / D+2 / D+K+3 cycles of
// compute + 1) for Loda / RS-Hash / xStream.
// Configuration writes (cfg.valid already qualified for this partition):
//   0x0000          threshold (Q16.16), reset 0
//   0x0100 + j      RS-Hash normalisation min of dimension j
//   0x0200 + j      RS-Hash normalisation 1/(max-min) of dimension j
//   0x8000 | r<<9 | w   word w of the parameter memory of sub-detector r
// The lock-step control, threshold placement and address map are this
// design's choices; the pipeline of blocks and the averaging follow the
// detector descriptions. Lint notes that stand: a detector partition leaves
// the input TUSER unused (feature beats carry no label, only the identity
// module forwards it), and the float-to-fixed converter drops the upper
// half of its 64-bit shift result by design (Q16.16 wraps).
module ad_ensemble
  import fsead_pkg::*;
#(
  parameter rm_kind_e KIND  = RM_LODA,
  parameter int       R     = (KIND == RM_LODA) ? 35 : (KIND == RM_RSHASH) ? 25 : 20,
  parameter int       D     = 21,
  parameter int       W     = 128,
  parameter int       BINS  = 20,
  parameter int       CMS_W = 2,
  parameter int       MOD   = 128,
  parameter int       K     = 20
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat,
  input  cfg_wr_t    cfg
);
  if (KIND == RM_IDENTITY) begin : g_identity
    assign m_valid = s_valid;
    assign s_ready = m_ready;
    assign m_beat  = s_beat;
  end else begin : g_ensemble
    localparam int DB = (D > 1) ? $clog2(D) : 1;

    q16_t          feat_q;
    logic          win_valid, win_ready, win_last;
    q16_t [D-1:0]  win_vec, xreg;
    logic          xlast;
    q16_t          thr;
    logic [R-1:0]  busy, done;
    q16_t [R-1:0]  scores;
    q16_t          avg;
    logic          start, ack, all_done, all_idle;
    logic [31:0]   fout;

    f32_to_q16 u_in (.f(s_beat.data), .q(feat_q));

    windower #(.D(D)) u_win (
      .clk, .rst, .s_valid, .s_ready, .s_data(feat_q), .s_last(s_beat.last),
      .m_valid(win_valid), .m_ready(win_ready), .m_vec(win_vec), .m_last(win_last));

    // control registers
    always_ff @(posedge clk) begin
      if (rst) thr <= '0;
      else if (cfg.valid && cfg.addr[15:0] == 16'h0000) thr <= q16_t'(cfg.data);
    end
    // RS-Hash normalisation registers, shared by the ensemble
    if (KIND == RM_RSHASH) begin : g_norm
      q16_t [D-1:0] nmin, nscale;
      always_ff @(posedge clk)
        if (cfg.valid && cfg.addr[15:8] == 8'h01 && 32'(cfg.addr[7:0]) < D)
          nmin[cfg.addr[DB-1:0]] <= q16_t'(cfg.data);
      always_ff @(posedge clk)
        if (cfg.valid && cfg.addr[15:8] == 8'h02 && 32'(cfg.addr[7:0]) < D)
          nscale[cfg.addr[DB-1:0]] <= q16_t'(cfg.data);
    end

    assign all_idle  = (busy == '0);
    assign all_done  = (done == '1);
    assign start     = win_valid && all_idle;
    assign win_ready = all_idle;
    assign ack       = all_done && (!m_valid || m_ready);

    always_ff @(posedge clk) begin
      if (rst) xlast <= 1'b0;
      else if (start) begin
        xreg  <= win_vec;
        xlast <= win_last;
      end
    end

    for (genvar r = 0; r < R; r++) begin : g_sub
      logic pwe;
      assign pwe = cfg.valid && cfg.addr[15] && (32'(cfg.addr[14:9]) == r);
      if (KIND == RM_LODA) begin : g_loda
        loda_subdetector #(.D(D), .BINS(BINS), .W(W)) u_sub (
          .clk, .rst, .start, .x(xreg), .busy(busy[r]), .done(done[r]),
          .ack, .score(scores[r]), .pwe, .paddr(cfg.addr[8:0]), .pdata(cfg.data));
      end else if (KIND == RM_RSHASH) begin : g_rshash
        rshash_subdetector #(.D(D), .CMS_W(CMS_W), .MOD(MOD), .W(W)) u_sub (
          .clk, .rst, .start, .x(xreg), .nmin(g_norm.nmin), .nscale(g_norm.nscale),
          .busy(busy[r]),
          .done(done[r]), .ack, .score(scores[r]), .pwe, .paddr(cfg.addr[8:0]),
          .pdata(cfg.data));
      end else begin : g_xstream
        xstream_subdetector #(.D(D), .K(K), .CMS_W(CMS_W), .MOD(MOD), .W(W)) u_sub (
          .clk, .rst, .start, .x(xreg), .busy(busy[r]), .done(done[r]),
          .ack, .score(scores[r]), .pwe, .paddr(cfg.addr[8:0]), .pdata(cfg.data));
      end
    end

    score_average #(.R(R)) u_avg (.scores, .avg);
    q16_to_f32 u_out (.q(avg), .f(fout));

    always_ff @(posedge clk) begin
      if (rst) begin
        m_valid <= 1'b0;
        m_beat  <= '0;
      end else begin
        if (m_valid && m_ready) m_valid <= 1'b0;
        if (ack) begin
          m_valid      <= 1'b1;
          m_beat.data  <= fout;
          m_beat.user  <= (avg > thr);
          m_beat.last  <= xlast;
        end
      end
    end
  end
endmodule
