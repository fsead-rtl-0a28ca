// fsead_top: the composable anomaly-detection fabric.
//
// Seven anomaly-detection partitions RP-1..RP-7 each take one input stream
// (from a fixed DMA channel, a top-level port here) and hold an ensemble of
// one detector kind, chosen per partition by RP_KIND (in the FPGA this is
// the partial bitstream loaded into the partition). Their score streams go
// through register slices into Switch-1. Three combination partitions
// COMBO1..3, each with four inputs and one output, hang off Switch-2. The
// two switches are joined by register-sliced links, so that any partition
// output can reach any combo input, combos can feed one another, and every
// result can reach one of the seven output DMA channels.
//
// Port numbering (0-based in the registers):
//   Switch-1 slaves  0-6 RP-1..RP-7, 7-9 from Switch-2 masters 12-14
//   Switch-1 masters 0-6 output channels out[0..6], 7-13 to Switch-2 slaves 0-6
//   Switch-2 slaves  0-6 from Switch-1, 7-9 COMBO1..COMBO3 outputs
//   Switch-2 masters 0-11 COMBO inputs (COMBOj input p at 4*(j-1)+p), 12-14 to Switch-1
// Every partition sits behind a decoupler; one register bit per partition
// (bits 0-6 RP-1..7, bits 7-9 COMBO1..3) isolates it and holds it in reset.
//
// Configuration is a write bus (one word per cycle): cfg_addr[19:16]
// selects the block, 0-6 RP-1..7, 7-9 COMBO1..3, 10 Switch-1, 11 Switch-2,
// 12 the decoupler register (word 0); cfg_addr[15:0] is passed to it.
// The switch port numbering, the address map and the placement of register
// slices are this design's choices; the set of blocks and how they connect
// follow the fabric's description. The defaults build the mixed ensemble of
// two Loda, two RS-Hash and three xStream partitions at full size.
module fsead_top
  import fsead_pkg::*;
#(
  parameter int       N_RP      = 7,
  parameter int       N_COMBO   = 3,
  parameter rm_kind_e RP_KIND [N_RP] = '{RM_LODA, RM_LODA, RM_RSHASH, RM_RSHASH,
                                         RM_XSTREAM, RM_XSTREAM, RM_XSTREAM},
  parameter int       R_LODA    = 35,
  parameter int       R_RSHASH  = 25,
  parameter int       R_XSTREAM = 20,
  parameter int       D         = 21,
  parameter int       W         = 128,
  parameter int       BINS      = 20,
  parameter int       CMS_W     = 2,
  parameter int       MOD       = 128,
  parameter int       K         = 20
) (
  input  logic                    clk,
  input  logic                    rst,
  // input DMA channels, one per AD partition
  input  logic       [N_RP-1:0]   in_valid,
  output logic       [N_RP-1:0]   in_ready,
  input  axis_beat_t [N_RP-1:0]   in_beat,
  // output DMA channels (Switch-1 masters 0..N_RP-1)
  output logic       [N_RP-1:0]   out_valid,
  input  logic       [N_RP-1:0]   out_ready,
  output axis_beat_t [N_RP-1:0]   out_beat,
  // configuration writes
  input  logic                    cfg_valid,
  input  logic       [19:0]       cfg_addr,
  input  logic       [31:0]       cfg_data,
  output logic [N_RP+N_COMBO-1:0] decouple_status
);
  localparam int NS1 = N_RP + N_COMBO;        // 10
  localparam int NM1 = 2 * N_RP;              // 14
  localparam int NS2 = N_RP + N_COMBO;        // 10
  localparam int NM2 = 4 * N_COMBO + N_COMBO; // 15
  localparam int NP  = N_RP + N_COMBO;

  // ---------------- configuration decode ----------------
  cfg_wr_t cfg_blk [16];
  logic [NP-1:0] decouple;

  always_comb
    for (int b = 0; b < 16; b++) begin
      cfg_blk[b].valid = cfg_valid && (32'(cfg_addr[19:16]) == b);
      cfg_blk[b].addr  = cfg_addr;
      cfg_blk[b].data  = cfg_data;
    end

  always_ff @(posedge clk)
    if (rst) decouple <= '0;
    else if (cfg_blk[CFG_BLK_DECOUPLE].valid && cfg_addr[15:0] == 16'd0)
      decouple <= cfg_data[NP-1:0];

  // ---------------- switch port bundles ----------------
  logic       [NS1-1:0] s1_valid, s1_ready;
  axis_beat_t [NS1-1:0] s1_beat;
  logic       [NM1-1:0] m1_valid, m1_ready;
  axis_beat_t [NM1-1:0] m1_beat;
  logic       [NS2-1:0] s2_valid, s2_ready;
  axis_beat_t [NS2-1:0] s2_beat;
  logic       [NM2-1:0] m2_valid, m2_ready;
  axis_beat_t [NM2-1:0] m2_beat;

  // ---------------- AD partitions ----------------
  for (genvar i = 0; i < N_RP; i++) begin : g_rp
    logic       rp_in_valid, rp_in_ready, rp_out_valid, rp_out_ready;
    logic       dc_out_valid, dc_out_ready, rp_rst;
    axis_beat_t rp_in_beat, rp_out_beat, dc_out_beat;
    cfg_wr_t    rp_cfg;

    dfx_decoupler #(.NI(1), .NO(1)) u_dec (
      .clk, .rst, .decouple(decouple[i]), .decouple_status(decouple_status[i]),
      .s_valid(in_valid[i]), .s_ready(in_ready[i]), .s_beat(in_beat[i]),
      .rp_s_valid(rp_in_valid), .rp_s_ready(rp_in_ready), .rp_s_beat(rp_in_beat),
      .rp_m_valid(rp_out_valid), .rp_m_ready(rp_out_ready), .rp_m_beat(rp_out_beat),
      .m_valid(dc_out_valid), .m_ready(dc_out_ready), .m_beat(dc_out_beat),
      .cfg(cfg_blk[CFG_BLK_RP0 + i]), .rp_cfg, .rp_rst);

    ad_ensemble #(
      .KIND(RP_KIND[i]),
      .R((RP_KIND[i] == RM_LODA) ? R_LODA : (RP_KIND[i] == RM_RSHASH) ? R_RSHASH : R_XSTREAM),
      .D(D), .W(W), .BINS(BINS), .CMS_W(CMS_W), .MOD(MOD), .K(K)
    ) u_rm (
      .clk, .rst(rp_rst),
      .s_valid(rp_in_valid), .s_ready(rp_in_ready), .s_beat(rp_in_beat),
      .m_valid(rp_out_valid), .m_ready(rp_out_ready), .m_beat(rp_out_beat),
      .cfg(rp_cfg));

    axis_reg_slice u_rs (
      .clk, .rst,
      .s_valid(dc_out_valid), .s_ready(dc_out_ready), .s_beat(dc_out_beat),
      .m_valid(s1_valid[i]), .m_ready(s1_ready[i]), .m_beat(s1_beat[i]));
  end

  // ---------------- Switch-1 ----------------
  axis_switch #(.NS(NS1), .NM(NM1)) u_sw1 (
    .clk, .rst,
    .s_valid(s1_valid), .s_ready(s1_ready), .s_beat(s1_beat),
    .m_valid(m1_valid), .m_ready(m1_ready), .m_beat(m1_beat),
    .cfg(cfg_blk[CFG_BLK_SW1]));

  assign out_valid = m1_valid[N_RP-1:0];
  assign out_beat  = m1_beat[N_RP-1:0];
  assign m1_ready[N_RP-1:0] = out_ready;

  // Switch-1 -> Switch-2 links
  for (genvar i = 0; i < N_RP; i++) begin : g_l12
    axis_reg_slice u_rs (
      .clk, .rst,
      .s_valid(m1_valid[N_RP+i]), .s_ready(m1_ready[N_RP+i]), .s_beat(m1_beat[N_RP+i]),
      .m_valid(s2_valid[i]), .m_ready(s2_ready[i]), .m_beat(s2_beat[i]));
  end

  // ---------------- Switch-2 ----------------
  axis_switch #(.NS(NS2), .NM(NM2)) u_sw2 (
    .clk, .rst,
    .s_valid(s2_valid), .s_ready(s2_ready), .s_beat(s2_beat),
    .m_valid(m2_valid), .m_ready(m2_ready), .m_beat(m2_beat),
    .cfg(cfg_blk[CFG_BLK_SW2]));

  // Switch-2 -> Switch-1 links
  for (genvar j = 0; j < N_COMBO; j++) begin : g_l21
    axis_reg_slice u_rs (
      .clk, .rst,
      .s_valid(m2_valid[4*N_COMBO+j]), .s_ready(m2_ready[4*N_COMBO+j]),
      .s_beat(m2_beat[4*N_COMBO+j]),
      .m_valid(s1_valid[N_RP+j]), .m_ready(s1_ready[N_RP+j]), .m_beat(s1_beat[N_RP+j]));
  end

  // ---------------- combination partitions ----------------
  for (genvar j = 0; j < N_COMBO; j++) begin : g_combo
    logic       [3:0] c_in_valid, c_in_ready;
    axis_beat_t [3:0] c_in_beat;
    logic       c_out_valid, c_out_ready, dc_out_valid, dc_out_ready, c_rst;
    axis_beat_t c_out_beat, dc_out_beat;
    cfg_wr_t    c_cfg;

    dfx_decoupler #(.NI(4), .NO(1)) u_dec (
      .clk, .rst, .decouple(decouple[N_RP+j]), .decouple_status(decouple_status[N_RP+j]),
      .s_valid(m2_valid[4*j +: 4]), .s_ready(m2_ready[4*j +: 4]), .s_beat(m2_beat[4*j +: 4]),
      .rp_s_valid(c_in_valid), .rp_s_ready(c_in_ready), .rp_s_beat(c_in_beat),
      .rp_m_valid(c_out_valid), .rp_m_ready(c_out_ready), .rp_m_beat(c_out_beat),
      .m_valid(dc_out_valid), .m_ready(dc_out_ready), .m_beat(dc_out_beat),
      .cfg(cfg_blk[CFG_BLK_COMBO0 + j]), .rp_cfg(c_cfg), .rp_rst(c_rst));

    combo #(.N_IN(4)) u_combo (
      .clk, .rst(c_rst),
      .s_valid(c_in_valid), .s_ready(c_in_ready), .s_beat(c_in_beat),
      .m_valid(c_out_valid), .m_ready(c_out_ready), .m_beat(c_out_beat),
      .cfg(c_cfg));

    axis_reg_slice u_rs (
      .clk, .rst,
      .s_valid(dc_out_valid), .s_ready(dc_out_ready), .s_beat(dc_out_beat),
      .m_valid(s2_valid[N_RP+j]), .m_ready(s2_ready[N_RP+j]), .m_beat(s2_beat[N_RP+j]));
  end
endmodule
