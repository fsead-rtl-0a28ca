// dfx_decoupler: isolates one reconfigurable partition while it is being
// reconfigured.
//
// While decouple is high, the partition's input stream shows tvalid low
// towards the partition and tready low towards the static side, its output
// stream shows tvalid low towards the static side and tready low towards the
// partition, configuration writes are blocked, and the partition is held in
// reset, so that whatever the half-loaded logic drives cannot leak out and
// it starts clean when released. With decouple low every signal passes
// straight through (no latency). decouple_status mirrors decouple,
// registered. The set of isolated signals is this design's choice.
module dfx_decoupler
  import fsead_pkg::*;
#(
  parameter int NI = 1,      // input streams of the partition
  parameter int NO = 1       // output streams of the partition
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  decouple,
  output logic                  decouple_status,
  // static side -> partition
  input  logic       [NI-1:0]   s_valid,
  output logic       [NI-1:0]   s_ready,
  input  axis_beat_t [NI-1:0]   s_beat,
  output logic       [NI-1:0]   rp_s_valid,
  input  logic       [NI-1:0]   rp_s_ready,
  output axis_beat_t [NI-1:0]   rp_s_beat,
  // partition -> static side
  input  logic       [NO-1:0]   rp_m_valid,
  output logic       [NO-1:0]   rp_m_ready,
  input  axis_beat_t [NO-1:0]   rp_m_beat,
  output logic       [NO-1:0]   m_valid,
  input  logic       [NO-1:0]   m_ready,
  output axis_beat_t [NO-1:0]   m_beat,
  input  cfg_wr_t               cfg,
  output cfg_wr_t               rp_cfg,
  output logic                  rp_rst
);
  assign rp_s_valid = decouple ? '0 : s_valid;
  assign s_ready    = decouple ? '0 : rp_s_ready;
  assign rp_s_beat  = s_beat;
  assign m_valid    = decouple ? '0 : rp_m_valid;
  assign rp_m_ready = decouple ? '0 : m_ready;
  assign m_beat     = rp_m_beat;
  always_comb begin
    rp_cfg = cfg;
    rp_cfg.valid = cfg.valid && !decouple;
  end
  assign rp_rst = rst || decouple;

  always_ff @(posedge clk)
    if (rst) decouple_status <= 1'b0;
    else     decouple_status <= decouple;
endmodule
