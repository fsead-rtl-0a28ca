// sliding_window: per-row counts of codes over the last W samples.
//
// For each of ROWS rows (1 for a Loda histogram, w for a count-min sketch)
// the block keeps a ring of the codes of the last W samples and a table of
// how often each of the NCODES codes occurs in that ring. count[r] is the
// table entry for the present code[r], read combinationally before the
// present sample is inserted. A cycle with upd set inserts the present codes:
// the entry for the new code is incremented and, once W samples have been
// seen, the entry for the code leaving the ring is decremented (a code that
// enters and leaves in the same cycle keeps its count). Reset empties the
// window. The ring-plus-count-table form is this design's choice; it keeps
// exactly the counts a window of W samples defines.
module sliding_window #(
  parameter int ROWS   = 2,
  parameter int NCODES = 128,
  parameter int W      = 128,
  localparam int CB    = $clog2(NCODES),
  localparam int NB    = $clog2(W + 1)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic [ROWS-1:0][CB-1:0]   code,
  input  logic                      upd,
  output logic [ROWS-1:0][NB-1:0]   count
);
  localparam int PB = (W > 1) ? $clog2(W) : 1;

  logic [CB-1:0] ring [ROWS][W];
  logic [NB-1:0] cnt  [ROWS][NCODES];
  logic [PB-1:0] wp;
  logic          full;

  always_comb
    for (int r = 0; r < ROWS; r++) count[r] = cnt[r][code[r]];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp   <= '0;
      full <= 1'b0;
      for (int r = 0; r < ROWS; r++) begin
        for (int c = 0; c < NCODES; c++) cnt[r][c] <= '0;
        for (int i = 0; i < W; i++)      ring[r][i] <= '0;
      end
    end else if (upd) begin
      for (int r = 0; r < ROWS; r++) begin
        ring[r][wp] <= code[r];
        if (full) begin
          if (ring[r][wp] != code[r]) begin
            cnt[r][code[r]]     <= cnt[r][code[r]] + 1'b1;
            cnt[r][ring[r][wp]] <= cnt[r][ring[r][wp]] - 1'b1;
          end
        end else begin
          cnt[r][code[r]] <= cnt[r][code[r]] + 1'b1;
        end
      end
      if (wp == PB'(W - 1)) begin
        wp   <= '0;
        full <= 1'b1;
      end else begin
        wp <= wp + 1'b1;
      end
    end
  end
endmodule
