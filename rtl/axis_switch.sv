// axis_switch: statically routed AXI4-Stream switch with NS slave (input)
// and NM master (output) ports.
//
// Each master port m has a routing register at word m: bit 31 disables the
// port, bits [7:0] name the 0-based slave port it is fed from. A slave named
// by several enabled masters is given to the lowest-numbered one and the
// others stay disabled, so every connection is point-to-point. A routed pair
// is a plain wire (valid and data forward, ready back, no added latency); an
// unrouted slave sees tready low and a disabled master drives tvalid low.
// Registers take effect the cycle after they are written; reset disables
// every master. The lowest-number rule follows the switch's specification;
// the register format and the combinational datapath are this design's
// choices. An assertion checks that no slave is ever driven to two masters.
module axis_switch
  import fsead_pkg::*;
#(
  parameter int NS = 10,
  parameter int NM = 14
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic       [NS-1:0]   s_valid,
  output logic       [NS-1:0]   s_ready,
  input  axis_beat_t [NS-1:0]   s_beat,
  output logic       [NM-1:0]   m_valid,
  input  logic       [NM-1:0]   m_ready,
  output axis_beat_t [NM-1:0]   m_beat,
  input  cfg_wr_t               cfg
);
  localparam int SB = (NS > 1) ? $clog2(NS) : 1;

  logic [NM-1:0]         en;
  logic [NM-1:0][SB-1:0] sel;
  logic [NM-1:0]         act;      // master m owns its slave
  logic [NS-1:0]         claimed;

  always_ff @(posedge clk) begin
    if (rst) begin
      en  <= '0;
      sel <= '0;
    end else if (cfg.valid) begin
      for (int m = 0; m < NM; m++)
        if (32'(cfg.addr[15:0]) == m) begin
          en[m]  <= !cfg.data[31] && (32'(cfg.data[7:0]) < NS);
          sel[m] <= cfg.data[SB-1:0];
        end
    end
  end

  always_comb begin
    claimed = '0;
    act     = '0;
    for (int m = 0; m < NM; m++)
      if (en[m] && !claimed[sel[m]]) begin
        act[m]          = 1'b1;
        claimed[sel[m]] = 1'b1;
      end
  end

  always_comb
    for (int m = 0; m < NM; m++) begin
      m_valid[m] = act[m] && s_valid[sel[m]];
      m_beat[m]  = s_beat[sel[m]];
    end

  always_comb begin
    s_ready = '0;
    for (int m = 0; m < NM; m++)
      if (act[m]) s_ready[sel[m]] = m_ready[m];
  end

  // at most one owner per slave
  always_ff @(posedge clk)
    if (!rst)
      for (int s = 0; s < NS; s++)
        assert ($countones(act & owners_of(s)) <= 1) else $error("slave %0d has two owners", s);

  function automatic logic [NM-1:0] owners_of(input int s);
    logic [NM-1:0] o;
    for (int m = 0; m < NM; m++) o[m] = (32'(sel[m]) == s);
    return o;
  endfunction
endmodule
