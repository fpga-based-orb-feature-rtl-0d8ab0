// line_window: K chained line buffers feeding a KxK register bank.
//
// This is the LB/RB pair of the paper (LB1/RB1 and LB3/RB3 with K=31, LB2/RB2
// with K=7). Each line buffer delays the pixel stream by one image line; the
// output of line buffer k is the pixel k lines above the incoming one and is
// shifted into row K-1-k of the register bank, so the bank holds the KxK
// neighbourhood of the last K lines. Following the paper's figure there are K
// line buffers, and the incoming line itself is not part of the window.
// Each line buffer is a memory indexed by a column counter shared by all K
// buffers; read-then-write at the same column makes it behave exactly like a
// width-long shift register, while the line length can change per level.
//
// Timing: on a cycle with shift=1 the pixel at (c,r) enters; from the next
// cycle win[i][j] holds pixel (c-K+1+j, r-K+i). The window centre is thus
// (c-K/2, r-K/2-1). win[0][0] is the top-left pixel. clear restarts the
// column counter at the start of a level; stale contents are never used
// because features are kept away from the borders.
module line_window
  import orb_pkg::*;
#(
  parameter int K     = 31,
  parameter int MAX_W = 640,
  parameter int XW    = $clog2(MAX_W)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic [XW-1:0] width,
  input  logic          shift,
  input  pix_t          pix,
  output pix_t          win [K][K]
);
  pix_t          lb [K][MAX_W];
  pix_t          lb_out [K];
  logic [XW-1:0] col;

  always_comb begin
    for (int k = 0; k < K; k++) lb_out[k] = lb[k][col];
  end

  always_ff @(posedge clk) begin
    if (shift) begin
      lb[0][col] <= pix;
      for (int k = 1; k < K; k++) lb[k][col] <= lb_out[k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        col <= '0;
    else if (clear)    col <= '0;
    else if (shift)    col <= (col == width - 1'b1) ? '0 : col + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= lb_out[K-1-r];
      end
    end
  end
endmodule
