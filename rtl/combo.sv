// combo: combination partition joining up to four score streams.
//
// A beat is taken from every enabled input at once, when all of them are
// valid and the one-beat output register is free or draining. The float32
// scores are converted to Q16.16 and combined by the selected score method:
//   0 averaging          (s_1 + ... + s_N) / N
//   1 maximisation       max(s_1, ..., s_N)
//   2 weighted average   (w_1 s_1 + ... + w_N s_N) / N   (formula as specified)
// and the labels (TUSER) by the selected label method: 0 or (any input 1),
// 1 voting (1 when more than half of the N enabled inputs are 1). N is the
// number of enabled inputs; division uses a table of 1/N. Output TLAST is
// the OR of the inputs' TLAST. The result leaves one cycle after the join.
// Registers (cfg.valid already qualified for this partition):
//   word 0  bits [1:0] score method, bit 2 label method (reset: average, or)
//   word 1  bits [N_IN-1:0] input enable mask (reset: all enabled)
//   word 2+i  weight w_i, Q16.16 (reset 0)
// The join rule, register map, tie rule of voting and reset values are this
// design's choices; the methods are the ones the design supports.
module combo
  import fsead_pkg::*;
#(
  parameter int N_IN = 4
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic       [N_IN-1:0]   s_valid,
  output logic       [N_IN-1:0]   s_ready,
  input  axis_beat_t [N_IN-1:0]   s_beat,
  output logic                    m_valid,
  input  logic                    m_ready,
  output axis_beat_t              m_beat,
  input  cfg_wr_t                 cfg
);
  localparam int NB = $clog2(N_IN + 1);

  logic [1:0]      smeth;
  logic            lmeth;
  logic [N_IN-1:0] mask;
  q16_t [N_IN-1:0] wt, sq;
  logic [NB-1:0]   n, votes;
  logic            fire, lab, lst;
  q16_t            res, inv_n;
  logic signed [31+NB:0] sum, wsum;
  logic [31:0]     fout;

  always_ff @(posedge clk) begin
    if (rst) begin
      smeth <= 2'd0;
      lmeth <= 1'b0;
      mask  <= '1;
      wt    <= '0;
    end else if (cfg.valid) begin
      if (cfg.addr[15:0] == 16'd0) begin
        smeth <= cfg.data[1:0];
        lmeth <= cfg.data[2];
      end
      if (cfg.addr[15:0] == 16'd1) mask <= cfg.data[N_IN-1:0];
      for (int i = 0; i < N_IN; i++)
        if (32'(cfg.addr[15:0]) == 2 + i) wt[i] <= q16_t'(cfg.data);
    end
  end

  for (genvar i = 0; i < N_IN; i++) begin : g_cvt
    f32_to_q16 u_cvt (.f(s_beat[i].data), .q(sq[i]));
  end

  always_comb begin
    n = '0;
    votes = '0;
    sum = '0;
    wsum = '0;
    lab = 1'b0;
    lst = 1'b0;
    res = q16_t'(32'sh8000_0000);
    for (int i = 0; i < N_IN; i++) begin
      if (mask[i]) begin
        n     = n + 1'b1;
        votes = votes + NB'(s_beat[i].user);
        sum   = sum + (32+NB)'(sq[i]);
        wsum  = wsum + (32+NB)'(qmul(wt[i], sq[i]));
        lst   = lst | s_beat[i].last;
        if (sq[i] > res) res = sq[i];
      end
    end
    inv_n = (n == '0) ? q16_t'(0) : q16_t'((65536 + 32'(n) / 2) / 32'(n));
    case (smeth)
      2'd0:    res = q16_t'(((64)'(sum)  * 64'(inv_n)) >>> 16);
      2'd2:    res = q16_t'(((64)'(wsum) * 64'(inv_n)) >>> 16);
      default: ;                                   // maximum already in res
    endcase
    if (lmeth) lab = ((32'(votes) << 1) > 32'(n));
    else       lab = (votes != '0);
    fire = (mask != '0) && ((s_valid & mask) == mask) && (!m_valid || m_ready);
  end

  assign s_ready = fire ? mask : '0;

  q16_to_f32 u_out (.q(res), .f(fout));

  always_ff @(posedge clk) begin
    if (rst) begin
      m_valid <= 1'b0;
      m_beat  <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (fire) begin
        m_valid     <= 1'b1;
        m_beat.data <= fout;
        m_beat.user <= lab;
        m_beat.last <= lst;
      end
    end
  end
endmodule
