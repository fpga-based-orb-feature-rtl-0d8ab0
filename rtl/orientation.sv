// orientation: sin and cos of the feature orientation from the patch moments.
//
// theta = atan2(m01, m10); sin = m01/sqrt(m10^2+m01^2), cos = m10/sqrt(...).
// Word-length reduction as the paper describes: both 21-bit moments are taken
// as sign and 20-bit magnitude, the leading zero bits they have in common are
// removed, the next N bits (N=8) are kept (zero-filled at the bottom when fewer
// than N remain) and the sign is put back, giving N+1 bits. Because both
// moments are scaled by the same power of two, the ratios are unchanged.
// Pipeline (one input per cycle, out_valid 4 cycles after in_valid):
//   1 shorten the word length   2 square and add   3 square root of sum*2^16
//   4 two divisions giving |m|*256/sqrt, rounded, sign restored.
// Outputs are signed with scale 256 (Q2.8, 10 bits): this format and the
// choice sin=0, cos=1 for an all-zero patch are this design's own.
module orientation
  import orb_pkg::*;
#(
  parameter int N = WL_N
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [MW-1:0]  m10,
  input  logic signed [MW-1:0]  m01,
  output logic                  out_valid,
  output logic signed [SCW-1:0] sin_q,
  output logic signed [SCW-1:0] cos_q
);
  localparam int MAGW = MW - 1;
  localparam int SQW  = 2 * N + 1;
  localparam int RW   = SQW + 16;          // radicand width
  localparam int ROW  = (RW + 1) / 2;      // root width

  // ---- stage 1: word-length reduction -----------------------------------
  logic [MAGW-1:0] a_mag, b_mag, both;
  logic [N-1:0]    a_red, b_red;
  int              lead;

  always_comb begin
    a_mag = m10[MW-1] ? MAGW'(-m10) : m10[MAGW-1:0];
    b_mag = m01[MW-1] ? MAGW'(-m01) : m01[MAGW-1:0];
    both  = a_mag | b_mag;
    lead  = -1;
    for (int i = 0; i < MAGW; i++) if (both[i]) lead = i;
    if (lead >= N - 1) begin
      a_red = N'(a_mag >> (lead - (N - 1)));
      b_red = N'(b_mag >> (lead - (N - 1)));
    end else if (lead >= 0) begin
      a_red = N'(a_mag << ((N - 1) - lead));
      b_red = N'(b_mag << ((N - 1) - lead));
    end else begin
      a_red = '0;
      b_red = '0;
    end
  end

  logic         v1, v2, v3;
  logic         s1a, s1b, s2a, s2b, s3a, s3b;
  logic [N-1:0] a1, b1, a2, b2, a3, b3;
  logic [SQW-1:0] sq2;
  logic [ROW-1:0] root3;

  function automatic logic [ROW-1:0] isqrt(logic [RW-1:0] v);
    logic [RW+1:0] rem, trial;
    logic [ROW-1:0] q;
    rem = '0;
    q   = '0;
    for (int i = ROW - 1; i >= 0; i--) begin
      rem   = (rem << 2) | (RW+2)'((v >> (2 * i)) & 2'b11);
      trial = (RW+2)'({q, 2'b01});
      if (rem >= trial) begin
        rem = rem - trial;
        q   = {q[ROW-2:0], 1'b1};
      end else begin
        q   = {q[ROW-2:0], 1'b0};
      end
    end
    return q;
  endfunction

  function automatic logic signed [SCW-1:0] ratio(logic [N-1:0] m, logic s, logic [ROW-1:0] r);
    logic [N+16:0] num, quo;
    num = (N+17)'({m, 16'd0}) + (N+17)'(r >> 1);
    quo = num / (N+17)'(r);
    return s ? -SCW'(quo) : SCW'(quo);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, out_valid} <= '0;
      {s1a, s1b, s2a, s2b, s3a, s3b} <= '0;
      {a1, b1, a2, b2, a3, b3} <= '0;
      sq2   <= '0;
      root3 <= '0;
      sin_q <= '0;
      cos_q <= '0;
    end else begin
      // stage 1
      v1 <= in_valid;
      a1 <= a_red;  b1 <= b_red;
      s1a <= m10[MW-1]; s1b <= m01[MW-1];
      // stage 2
      v2 <= v1;
      a2 <= a1; b2 <= b1; s2a <= s1a; s2b <= s1b;
      sq2 <= SQW'(a1 * a1) + SQW'(b1 * b1);
      // stage 3
      v3 <= v2;
      a3 <= a2; b3 <= b2; s3a <= s2a; s3b <= s2b;
      root3 <= isqrt(RW'({sq2, 16'd0}));
      // stage 4
      out_valid <= v3;
      if (root3 == '0) begin
        sin_q <= '0;
        cos_q <= SCW'(256);
      end else begin
        sin_q <= ratio(b3, s3b, root3);
        cos_q <= ratio(a3, s3a, root3);
      end
    end
  end
endmodule
