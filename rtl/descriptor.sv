// descriptor: steered BRIEF over the frozen 31x31 RB3 window.
//
// For test i the two pattern points A_i and B_i (offsets from the window
// centre, see orb_pkg::PATTERN) are rotated with the rule the paper gives,
//   x' = x*cos + y*sin,   y' = y*cos - x*sin,
// using the feature's sin/cos (scale 256), rounded to the nearest pixel and
// clamped to +-15. Bit i of the descriptor is 1 when I(A_i') >= I(B_i').
// PPC tests are done per cycle (8 by default, this design's choice), so a
// 256-bit descriptor takes NPAIRS/PPC = 32 cycles after start; done pulses
// for one cycle with desc valid, and desc holds until the next start.
// The window must not change while busy (the controller stops the shifting).
module descriptor
  import orb_pkg::*;
#(
  parameter int PPC = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [SCW-1:0] sin_q,
  input  logic signed [SCW-1:0] cos_q,
  input  pix_t                  win [PATCH][PATCH],
  output logic                  busy,
  output logic                  done,
  output logic [NPAIRS-1:0]     desc
);
  localparam int STEPS = NPAIRS / PPC;
  localparam int SW    = $clog2(STEPS);

  logic                  running;
  logic [SW-1:0]         step;
  logic signed [SCW-1:0] s_r, c_r;
  logic [PPC-1:0]        bits;

  function automatic int rot(int x, int y, int c, int s);
    int v;
    v = (x * c + y * s + 128) >>> 8;
    if (v > HP)  v = HP;
    if (v < -HP) v = -HP;
    return v + HP;
  endfunction

  always_comb begin
    for (int p = 0; p < PPC; p++) begin
      pair_t pr;
      int    axr, ayr, bxr, byr;
      pr  = PATTERN[int'(step) * PPC + p];
      axr = rot(int'(pr.ax), int'(pr.ay), int'(c_r), int'(s_r));
      ayr = rot(int'(pr.ay), -int'(pr.ax), int'(c_r), int'(s_r));
      bxr = rot(int'(pr.bx), int'(pr.by), int'(c_r), int'(s_r));
      byr = rot(int'(pr.by), -int'(pr.bx), int'(c_r), int'(s_r));
      bits[p] = win[ayr][axr] >= win[byr][bxr];
    end
  end

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      step    <= '0;
      done    <= 1'b0;
      s_r     <= '0;
      c_r     <= '0;
      desc    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        step    <= '0;
        s_r     <= sin_q;
        c_r     <= cos_q;
      end else if (running) begin
        desc[int'(step) * PPC +: PPC] <= bits;
        step <= step + 1'b1;
        if (step == SW'(STEPS - 1)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end
endmodule
