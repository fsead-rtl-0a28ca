// axis_reg_slice: AXI4-Stream register slice, a two-entry FIFO.
//
// Both the forward path (valid, data) and the backward path (ready) leave
// from flip-flops, which cuts long routes between partitions and switches.
// With two entries the slice passes one beat per cycle with no bubbles:
// s_ready stays high as long as an entry is free, and a beat written into an
// empty slice is visible at the output the next cycle (latency 1).
// Assertions check the AXI4-Stream rule that a valid beat is held, unchanged,
// until it is accepted, on both ports.
module axis_reg_slice
  import fsead_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       s_valid,
  output logic       s_ready,
  input  axis_beat_t s_beat,
  output logic       m_valid,
  input  logic       m_ready,
  output axis_beat_t m_beat
);
  axis_beat_t mem [2];
  logic       rp, wp;
  logic [1:0] cnt;

  assign s_ready = (cnt != 2'd2);
  assign m_valid = (cnt != 2'd0);
  assign m_beat  = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      rp  <= 1'b0;
      wp  <= 1'b0;
      cnt <= 2'd0;
      mem[0] <= '0;
      mem[1] <= '0;
    end else begin
      if (s_valid && s_ready) begin
        mem[wp] <= s_beat;
        wp      <= !wp;
      end
      if (m_valid && m_ready) rp <= !rp;
      cnt <= cnt + 2'(s_valid && s_ready) - 2'(m_valid && m_ready);
    end
  end

  // handshake rules
  logic       s_hold, m_hold;
  axis_beat_t s_prev, m_prev;
  always_ff @(posedge clk) begin
    if (rst) begin
      s_hold <= 1'b0;
      m_hold <= 1'b0;
    end else begin
      s_hold <= s_valid && !s_ready;
      m_hold <= m_valid && !m_ready;
      s_prev <= s_beat;
      m_prev <= m_beat;
      if (s_hold) assert (s_valid && s_beat == s_prev) else $error("upstream dropped or changed a stalled beat");
      if (m_hold) assert (m_valid && m_beat == m_prev) else $error("register slice changed a stalled beat");
    end
  end
endmodule
