// scale_recover: maps feature coordinates of the resized level back to the
// scale of the input image. Level-2 coordinates are multiplied by 1.2 and
// rounded to nearest, (6x+2)/5; level-1 coordinates pass unchanged.
// The paper only names this step; the rounding is this design's choice.
// Combinational.
module scale_recover
  import orb_pkg::*;
(
  input  logic          level,
  input  logic [CW-1:0] x,
  input  logic [CW-1:0] y,
  output logic [CW-1:0] x_full,
  output logic [CW-1:0] y_full
);
  always_comb begin
    if (level) begin
      x_full = CW'(((CW+3)'(x) * 6 + 2) / 5);
      y_full = CW'(((CW+3)'(y) * 6 + 2) / 5);
    end else begin
      x_full = x;
      y_full = y;
    end
  end
endmodule
