// fsead_pkg: types and constants shared by the streaming anomaly-detection fabric.
//
// Numbers inside the detectors are signed Q16.16 fixed point (32 bits, 16
// integer and 16 fraction bits), the format the detectors were specified in.
// Every stream between blocks carries IEEE-754 float32 words, one per beat,
// with a one-bit side channel (TUSER) that holds the anomaly label on score
// streams and TLAST. The configuration bus is a simple write-only bus: one
// word per cycle, 20-bit word address, 32-bit data; bits [19:16] of the
// address select the block (see CFG_BLK_* below), bits [15:0] a register.
// The address map and the stream side channel are this design's own choices.
package fsead_pkg;

  typedef logic signed [31:0] q16_t;   // Q16.16

  // One AXI4-Stream beat (TVALID/TREADY travel beside it).
  typedef struct packed {
    logic [31:0] data;   // float32: feature value or score
    logic        user;   // label (1 = anomaly) on score streams
    logic        last;   // TLAST
  } axis_beat_t;

  // Configuration write (stands in for AXI-Lite writes through the interconnect).
  typedef struct packed {
    logic        valid;
    logic [19:0] addr;
    logic [31:0] data;
  } cfg_wr_t;

  // Reconfigurable module held by an AD partition.
  typedef enum logic [1:0] {
    RM_IDENTITY = 2'd0,
    RM_LODA     = 2'd1,
    RM_RSHASH   = 2'd2,
    RM_XSTREAM  = 2'd3
  } rm_kind_e;

  // Block select field of the configuration address.
  localparam int CFG_BLK_RP0     = 0;    // RP-1..RP-7 at 0..6
  localparam int CFG_BLK_COMBO0  = 7;    // COMBO1..COMBO3 at 7..9
  localparam int CFG_BLK_SW1     = 10;
  localparam int CFG_BLK_SW2     = 11;
  localparam int CFG_BLK_DECOUPLE = 12;

  // Q16.16 multiply: full product, arithmetic shift (floor), keep 32 bits (wrap).
  function automatic q16_t qmul(input q16_t a, input q16_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return q16_t'(p >>> 16);
  endfunction

  // Integer part of a Q16.16 value (floor), sign-extended to 32 bits.
  function automatic logic [31:0] qfloor(input q16_t a);
    return 32'(a >>> 16);
  endfunction

endpackage
