// gauss7: 7x7 Gaussian smoothing of the centre pixel of the RB2 window.
//
// Purely combinational. The kernel is separable with 1-D weights
// [5,8,12,14,12,8,5]/64 (close to sigma = 2); the paper gives the window size
// but not the weights, so these are this design's choice. The 2-D sum is
// rounded and divided by 4096.
module gauss7
  import orb_pkg::*;
(
  input  pix_t win [GAUSS_K][GAUSS_K],
  output pix_t pix
);
  logic [19:0] acc;
  always_comb begin
    acc = '0;
    for (int r = 0; r < GAUSS_K; r++)
      for (int c = 0; c < GAUSS_K; c++)
        acc += 20'(gauss_w(r) * gauss_w(c)) * 20'(win[r][c]);
    pix = pix_t'((acc + 20'd2048) >> 12);
  end
endmodule
