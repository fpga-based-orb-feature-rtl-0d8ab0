// orb_pkg: types and constants shared by the ORB feature extraction pipeline.
//
// Image sizes (640x480 input, 533x400 second pyramid level), the 31x31 patch,
// the 7x7 Gaussian window, the 8-bit moment word length and the 256-pair
// (32x8-bit) descriptor follow the paper. The Gaussian weights, the FAST
// threshold, the border margin and the BRIEF test pattern are this design's
// own choices; the pattern is produced at elaboration by gen_pattern() below
// (a fixed xorshift generator, each coordinate the sum of four uniform
// integers in [-5,5], pairs kept inside radius 13), so no table file is needed.
package orb_pkg;

  localparam int IMG_W   = 640;
  localparam int IMG_H   = 480;
  localparam int PATCH   = 31;             // descriptor / moment window
  localparam int HP      = PATCH / 2;      // 15, patch radius
  localparam int GAUSS_K = 7;
  localparam int MW      = 21;             // full moment width
  localparam int WL_N    = 8;              // shortened moment word length (plus sign)
  localparam int SCW     = 10;             // sin/cos width, signed, scale 256
  localparam int NPAIRS  = 256;            // 32 x 8 bit descriptor
  localparam int EDGE    = 20;             // features kept this far from each border
  localparam int CW      = 10;             // coordinate width
  localparam int FAST_T  = 20;             // FAST intensity threshold
  localparam int FAST_N  = 9;              // contiguous arc length

  typedef logic [7:0] pix_t;

  // Level-2 size for a WxH level-1 image: output u reads source columns
  // floor(1.2u) and floor(1.2u)+1, so u < 5(W-1)/6, giving floor(5W/6).
  function automatic int lvl2_size(int n);
    return (5 * n) / 6;
  endfunction

  // One BRIEF test: points A=(ax,ay) and B=(bx,by), offsets from the centre.
  typedef struct packed {
    logic signed [4:0] ax;
    logic signed [4:0] ay;
    logic signed [4:0] bx;
    logic signed [4:0] by;
  } pair_t;

  typedef pair_t [NPAIRS-1:0] pattern_t;

  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  // Each coordinate is approximately Gaussian: the sum of four uniform
  // integers in [-5,5] drawn from a xorshift generator.
  function automatic pattern_t gen_pattern();
    pattern_t    p;
    logic [31:0] s;
    int          c [4];
    int          n;
    s = 32'h2545_F491;
    n = 0;
    p = '0;
    for (int t = 0; t < 4 * NPAIRS; t++) begin
      for (int j = 0; j < 4; j++) begin
        c[j] = 0;
        for (int k = 0; k < 4; k++) begin
          s = xorshift32(s);
          c[j] = c[j] + int'(s % 32'd11) - 5;
        end
      end
      if (n < NPAIRS && c[0]*c[0] + c[1]*c[1] <= 169 && c[2]*c[2] + c[3]*c[3] <= 169 &&
          (c[0] != c[2] || c[1] != c[3])) begin
        p[n] = '{ax: 5'(c[0]), ay: 5'(c[1]), bx: 5'(c[2]), by: 5'(c[3])};
        n = n + 1;
      end
    end
    return p;
  endfunction

  localparam pattern_t PATTERN = gen_pattern();

  // 1-D Gaussian weights, sum 64 (close to sigma = 2).
  function automatic int gauss_w(int k);
    case (k)
      0, 6:    return 5;
      1, 5:    return 8;
      2, 4:    return 12;
      default: return 14;
    endcase
  endfunction

  // FAST Bresenham circle of radius 3, 16 points, clockwise from the top.
  function automatic int fast_dx(int i);
    case (i)
      0: return 0;   1: return 1;   2: return 2;   3: return 3;
      4: return 3;   5: return 3;   6: return 2;   7: return 1;
      8: return 0;   9: return -1; 10: return -2; 11: return -3;
      12: return -3; 13: return -3; 14: return -2; default: return -1;
    endcase
  endfunction

  function automatic int fast_dy(int i);
    return fast_dx((i + 12) % 16);
  endfunction

  // Feature record leaving the accelerator.
  typedef struct packed {
    logic              level;    // 0: 640x480 level, 1: resized level
    logic [CW-1:0]     x;        // coordinates in the level's own image
    logic [CW-1:0]     y;
    logic [CW-1:0]     x_full;   // coordinates scaled back to the input image
    logic [CW-1:0]     y_full;
    logic [NPAIRS-1:0] desc;     // bit i = test i
  } feat_t;

endpackage
