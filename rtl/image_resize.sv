// image_resize: builds the two-level image pyramid while the frame streams in.
//
// Every input pixel is written unchanged to the level-1 bank of RAM1. At the
// same time a bilinear downscaler by 1.2 produces the level-2 image
// (640x480 -> 533x400 by default, as in the paper). Output pixel (u,v) is
// interpolated at source position (1.2u, 1.2v): its integer part (x0,y0) and
// fraction (fx/5, fy/5) are stepped incrementally, so no multiplier or divider
// by 1.2 is needed; the weights are (5-fx)(5-fy), fx(5-fy), (5-fx)fy and fx*fy
// and the sum is divided by 25 with rounding. The mapping and rounding are this
// design's choices; the paper states only bilinear interpolation and the sizes.
// One line buffer keeps the previous source row; an output is emitted on the
// cycle source pixel (x0+1, y0+1) arrives, so at most one level-2 pixel is
// produced per input pixel and the module never stalls its input.
// Interface: start clears the counters for a new frame; in_ready stays high
// until W*H pixels have been taken. Writes to RAM1 are registered (1 cycle).
// l1_count / l2_count are the numbers of pixels written so far per level.
module image_resize
  import orb_pkg::*;
#(
  parameter int W   = 640,
  parameter int H   = 480,
  parameter int W2  = lvl2_size(W),
  parameter int H2  = lvl2_size(H),
  parameter int A1W = $clog2(W * H),
  parameter int A2W = $clog2(W2 * H2)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           in_valid,
  output logic           in_ready,
  input  pix_t           in_pix,
  output logic           l1_we,
  output logic [A1W-1:0] l1_addr,
  output pix_t           l1_data,
  output logic           l2_we,
  output logic [A2W-1:0] l2_addr,
  output pix_t           l2_data,
  output logic [A1W:0]   l1_count,
  output logic [A2W:0]   l2_count
);
  localparam int XW = $clog2(W + 1);
  localparam int YW = $clog2(H + 1);

  pix_t          prev_row [W];
  logic          active;
  logic [XW-1:0] x, nx0, nu;
  logic [YW-1:0] y, ny0, nv;
  logic [2:0]    nfx, nfy;
  pix_t          cur_prev, up_prev, up;
  logic          take, emit;
  logic [12:0]   acc;

  assign in_ready = active;
  assign take     = in_valid && active;
  assign up       = prev_row[x];
  assign emit     = take && (nv < YW'(H2)) && (y == ny0 + 1'b1) &&
                    (nu < XW'(W2)) && (x == nx0 + 1'b1);

  always_comb begin
    acc = 13'(  (5 - nfx) * (5 - nfy) * up_prev
              + nfx       * (5 - nfy) * up
              + (5 - nfx) * nfy       * cur_prev
              + nfx       * nfy       * in_pix);
  end

  always_ff @(posedge clk) begin
    if (take) begin
      prev_row[x] <= in_pix;
      cur_prev    <= in_pix;
      up_prev     <= up;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      {x, y, nx0, nu, ny0, nv, nfx, nfy} <= '0;
      l1_we <= 1'b0; l2_we <= 1'b0;
      l1_addr <= '0; l2_addr <= '0; l1_data <= '0; l2_data <= '0;
      l1_count <= '0; l2_count <= '0;
    end else begin
      l1_we <= take;
      l2_we <= emit;
      if (l1_we) l1_count <= l1_count + 1'b1;
      if (l2_we) l2_count <= l2_count + 1'b1;
      if (start) begin
        active <= 1'b1;
        {x, y, nx0, nu, ny0, nv, nfx, nfy} <= '0;
        l1_count <= '0;
        l2_count <= '0;
      end else if (take) begin
        l1_addr <= A1W'(y * W + x);
        l1_data <= in_pix;
        if (emit) begin
          l2_addr <= A2W'(nv * W2 + nu);
          l2_data <= pix_t'((acc + 13'd12) / 13'd25);
          nu      <= nu + 1'b1;
          if (nfx == 3'd4) begin nfx <= 3'd0; nx0 <= nx0 + XW'(2); end
          else             begin nfx <= nfx + 1'b1; nx0 <= nx0 + 1'b1; end
        end
        if (x == XW'(W - 1)) begin
          x   <= '0;
          nu  <= '0;
          nx0 <= '0;
          nfx <= '0;
          y   <= y + 1'b1;
          if (y == YW'(H - 1)) active <= 1'b0;
          if (nv < YW'(H2) && y == ny0 + 1'b1) begin
            nv <= nv + 1'b1;
            if (nfy == 3'd4) begin nfy <= 3'd0; ny0 <= ny0 + YW'(2); end
            else             begin nfy <= nfy + 1'b1; ny0 <= ny0 + 1'b1; end
          end
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end
endmodule
