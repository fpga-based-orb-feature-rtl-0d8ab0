// two_stage_buffer: the synchronized two-stage shifting line buffers with
// their controller and the descriptor unit (the structure of the paper's
// Fig. 4).
//
// Stage 1 (LB2/RB2, 7 lines and a 7x7 bank) feeds the Gaussian filter; its
// smoothed pixels stream into stage 2 (LB3/RB3, 31 lines and a 31x31 bank),
// which holds the smoothed patch for the descriptor. The controller reads the
// current level from RAM1 through its own read port and moves all registers
// of both stages forward together (signal adv). After every stage-2 shift it
// compares the window centre (x_2,y_2) with the oldest feature (x,y) in RAM3.
// On a match it stops shifting, waits until that feature's sin/cos is in RAM2
// and the output buffer has room, runs the descriptor (32 cycles) on the
// frozen window, emits the record, pops RAM2/RAM3 and resumes. These rules
// follow the paper; the pipeline details are this design's own.
// To be sure every feature the window can reach is already in RAM3, the read
// index may run at most four lines (less a few cycles of slack) ahead of the
// detection path's read index det_ptr, until detection of the level is
// finished (det_done), and never beyond the pixels already written. Since the stage-2 centre trails its read index by 20
// lines and the detection centre trails its own by 16, this keeps the
// descriptor window behind detection, yet lets it reach the oldest feature
// even while detection waits for room in RAM3. A smoothed pixel (c,r) is
// made when raw pixel (c+3,r+4) is read, and the stage-2 centre for it is
// (c-15,r-16); features must lie at least 20 pixels from each border so that
// all of this stays inside one line of the level.
// Timing: read -> RAM data (1 cycle) -> stage-1 shift -> stage-2 shift ->
// compare. level_done pulses once the last pixel of the level has passed.
module two_stage_buffer
  import orb_pkg::*;
#(
  parameter int MAX_W = IMG_W,
  parameter int MAX_H = IMG_H,
  parameter int AW    = $clog2(MAX_W * MAX_H),
  parameter int PPC   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  level_start,
  input  logic [CW-1:0]         width,
  input  logic [CW-1:0]         height,
  // RAM1 read port
  output logic                  re,
  output logic [AW-1:0]         raddr,
  input  pix_t                  rdata,
  // progress of the detection path
  input  logic [AW:0]           det_ptr,
  input  logic [AW:0]           written,      // pixels of the level in RAM1
  input  logic                  det_done,
  // head of RAM3 (x,y) and RAM2 (sin,cos)
  input  logic                  xy_avail,
  input  logic [CW-1:0]         feat_x,
  input  logic [CW-1:0]         feat_y,
  input  logic                  sc_avail,
  input  logic signed [SCW-1:0] sin_q,
  input  logic signed [SCW-1:0] cos_q,
  output logic                  feat_pop,
  // descriptor output
  input  logic                  out_full,
  output logic                  rec_valid,
  output logic [CW-1:0]         rec_x,
  output logic [CW-1:0]         rec_y,
  output logic [NPAIRS-1:0]     rec_desc,
  // status
  output logic                  stalled,
  output logic                  level_done
);
  localparam int SW = CW + 2;               // signed coordinate width

  logic              lead_ok;
  logic              active, adv, hit, d_start, d_busy, d_done;
  logic [AW:0]       q, npix;
  logic [CW-1:0]     qx, qy;
  logic              rd_v, w1_v, w2_v;
  logic [CW-1:0]     rd_x, rd_y;
  logic signed [SW-1:0] w1_x, w1_y, w2_x, w2_y, c2x, c2y, fx_s, fy_s;
  pix_t              win1 [GAUSS_K][GAUSS_K];
  pix_t              win2 [PATCH][PATCH];
  pix_t              smooth;

  assign npix  = (AW+1)'(width * height);
  // Raw index q brings the stage-2 centre to q-(20W+18); the detection path
  // judges that same centre when it reads index q-(4W+3). The compare for q
  // happens 3 cycles after q is read, and RAM3 shows a feature 4 cycles after
  // its detection read, so q may be read once q-(4W+3) has been read by the
  // detection path in an earlier cycle: q <= det_ptr + 4W + 2. That bound
  // also lets the window reach the oldest feature while detection waits.
  assign lead_ok = ((q < det_ptr + (AW+1)'(4 * width + 3)) || det_done) && (q < written);
  assign re    = adv && active && (q < npix) && lead_ok;
  assign raddr = AW'(q);

  // stage-2 window centre
  assign c2x = w2_x - SW'(HP);
  assign c2y = w2_y - SW'(HP + 1);
  assign fx_s = $signed({2'b00, feat_x});
  assign fy_s = $signed({2'b00, feat_y});
  assign hit = w2_v && xy_avail && (c2x == fx_s) && (c2y == fy_s);
  assign adv = !hit;
  assign d_start = hit && sc_avail && !d_busy && !d_done && !out_full;
  assign stalled = hit;

  line_window #(.K(GAUSS_K), .MAX_W(MAX_W), .XW(CW)) u_stage1 (
    .clk, .rst_n, .clear(level_start), .width,
    .shift(adv && rd_v), .pix(rdata), .win(win1)
  );

  gauss7 u_gauss (.win(win1), .pix(smooth));

  line_window #(.K(PATCH), .MAX_W(MAX_W), .XW(CW)) u_stage2 (
    .clk, .rst_n, .clear(level_start), .width,
    .shift(adv && w1_v), .pix(smooth), .win(win2)
  );

  descriptor #(.PPC(PPC)) u_desc (
    .clk, .rst_n, .start(d_start), .sin_q, .cos_q, .win(win2),
    .busy(d_busy), .done(d_done), .desc(rec_desc)
  );

  assign feat_pop  = d_done;
  assign rec_valid = d_done;
  assign rec_x     = feat_x;
  assign rec_y     = feat_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      level_done <= 1'b0;
      q <= '0; qx <= '0; qy <= '0;
      {rd_v, w1_v, w2_v} <= '0;
      rd_x <= '0; rd_y <= '0;
      {w1_x, w1_y, w2_x, w2_y} <= '0;
    end else begin
      level_done <= 1'b0;
      if (level_start) begin
        active <= 1'b1;
        q <= '0; qx <= '0; qy <= '0;
        {rd_v, w1_v, w2_v} <= '0;
      end else if (adv) begin
        rd_v <= re;
        if (re) begin
          q    <= q + 1'b1;
          rd_x <= qx;
          rd_y <= qy;
          if (qx == width - 1'b1) begin qx <= '0; qy <= qy + 1'b1; end
          else                         qx <= qx + 1'b1;
        end
        // stage 1 takes the pixel read last cycle
        w1_v <= rd_v;
        if (rd_v) begin
          w1_x <= SW'(rd_x) - SW'(GAUSS_K / 2);      // centre of RB2 = smoothed pixel
          w1_y <= SW'(rd_y) - SW'(GAUSS_K / 2 + 1);
        end
        // stage 2 takes the smoothed pixel
        w2_v <= w1_v;
        if (w1_v) begin
          w2_x <= w1_x;
          w2_y <= w1_y;
        end
        if (active && q == npix && !re && !rd_v && !w1_v && !w2_v) begin
          active     <= 1'b0;
          level_done <= 1'b1;
        end
      end
    end
  end

  // The oldest feature must never lie behind the stage-2 window centre.
  assert property (@(posedge clk) disable iff (!rst_n)
    (w2_v && xy_avail && active) |->
      ((fy_s > c2y) || (fy_s == c2y && fx_s >= c2x)));
endmodule
