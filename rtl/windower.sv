// windower: assembles D scalar features, arriving one per stream beat, into
// one sample vector (block 1 of the detector pipeline).
//
// A shift register of D words takes a feature on every accepted beat; the
// newest feature enters the top element, so after D beats element j holds
// feature j (the first feature received is element 0). When the D-th
// feature is taken the vector becomes valid and is held, with no further
// beats accepted, until the consumer takes it (m_valid & m_ready); the next
// sample may then start in the following cycle. m_last is the TLAST of the
// sample's final feature. The handshake on both sides is AXI4-Stream style.
// Latency: the vector is valid the cycle after its last feature is accepted.
module windower
  import fsead_pkg::*;
#(
  parameter int D = 21
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          s_valid,
  output logic          s_ready,
  input  q16_t          s_data,
  input  logic          s_last,
  output logic          m_valid,
  input  logic          m_ready,
  output q16_t [D-1:0]  m_vec,
  output logic          m_last
);
  localparam int CW = $clog2(D + 1);
  logic [CW-1:0] cnt;
  q16_t [D-1:0]  sr;

  assign s_ready = !m_valid;
  assign m_vec   = sr;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      sr      <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        for (int j = 0; j < D - 1; j++) sr[j] <= sr[j+1];
        sr[D-1] <= s_data;
        if (cnt == CW'(D - 1)) begin
          cnt     <= '0;
          m_valid <= 1'b1;
          m_last  <= s_last;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
