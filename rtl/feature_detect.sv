// feature_detect: oFAST detection on the RB1 window.
//
// Combinational. Given the 31x31 window around a candidate pixel it
//  * runs the FAST segment test: the centre is a corner when FAST_N (9)
//    contiguous pixels of the 16-pixel radius-3 circle are all brighter than
//    centre+FAST_T or all darker than centre-FAST_T;
//  * computes the patch moments m10 = sum(x*I) and m01 = sum(y*I) over the
//    disc x^2+y^2 <= 15^2, with x to the right and y downwards. Column and
//    row sums of the disc are formed first and then weighted by their offset.
// The paper gives the moment definition, the radius and the 21-bit width;
// the FAST variant, threshold 20 and the absence of non-maximum suppression
// are this design's choices (ORB's usual defaults).
module feature_detect
  import orb_pkg::*;
(
  input  pix_t                 win [PATCH][PATCH],
  output logic                 is_corner,
  output logic signed [MW-1:0] m10,
  output logic signed [MW-1:0] m01
);
  logic [15:0] bright, dark;
  logic [9:0]  cen;

  always_comb begin
    cen = 10'(win[HP][HP]);
    for (int i = 0; i < 16; i++) begin
      bright[i] = 10'(win[HP + fast_dy(i)][HP + fast_dx(i)]) > cen + 10'(FAST_T);
      dark[i]   = 10'(win[HP + fast_dy(i)][HP + fast_dx(i)]) + 10'(FAST_T) < cen;
    end
    is_corner = 1'b0;
    for (int s = 0; s < 16; s++) begin
      logic all_b, all_d;
      all_b = 1'b1;
      all_d = 1'b1;
      for (int j = 0; j < FAST_N; j++) begin
        all_b &= bright[(s + j) % 16];
        all_d &= dark[(s + j) % 16];
      end
      if (all_b || all_d) is_corner = 1'b1;
    end
  end

  logic [12:0] colsum [PATCH];
  logic [12:0] rowsum [PATCH];

  always_comb begin
    for (int k = 0; k < PATCH; k++) begin
      colsum[k] = '0;
      rowsum[k] = '0;
    end
    for (int r = 0; r < PATCH; r++)
      for (int c = 0; c < PATCH; c++)
        if ((r - HP) * (r - HP) + (c - HP) * (c - HP) <= HP * HP) begin
          colsum[c] += 13'(win[r][c]);
          rowsum[r] += 13'(win[r][c]);
        end
    m10 = '0;
    m01 = '0;
    for (int k = 0; k < PATCH; k++) begin
      m10 += MW'(k - HP) * $signed({8'd0, colsum[k]});
      m01 += MW'(k - HP) * $signed({8'd0, rowsum[k]});
    end
  end
endmodule
