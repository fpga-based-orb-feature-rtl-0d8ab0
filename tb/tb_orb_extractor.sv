// tb_orb_extractor: end-to-end test of the accelerator on a reduced frame.
//
// A 96x80 synthetic frame (level 2: 80x66) is streamed in with random gaps;
// the output stream is throttled at random. Every record (level, coordinates,
// scaled coordinates, 256-bit descriptor) is compared, in order, with the
// behavioural model of orb_ref_pkg. RAM2/RAM3 and the output buffer are made
// small so that the detection path has to wait for room and the descriptor
// path has to wait for the output buffer. The test counts how often each
// mechanism occurred and fails if one never did: descriptor stops, detection
// waiting for the frame to be written, detection waiting for RAM3 room, the
// descriptor path waiting for detection, output-buffer back-pressure and
// both pyramid levels. (Input back-pressure is counted and reported only: the
// resizer takes a pixel every cycle, so the input buffer never fills.)
`timescale 1ns/1ps
module tb_orb_extractor;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  localparam int W = 96, H = 80;
  localparam int FDEPTH = 16;

  logic  clk = 0, rst_n = 0, start = 0;
  logic  pix_valid = 0, pix_ready, feat_valid, feat_ready = 0, busy, frame_done;
  pix_t  pix = '0;
  feat_t feat;
  int    checks = 0, failures = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  orb_extractor #(.W(W), .H(H), .FDEPTH(FDEPTH), .IBUF_DEPTH(4), .OBUF_DEPTH(2)) u_dut (
    .clk, .rst_n, .start, .pix_valid, .pix_ready, .pix,
    .feat_valid, .feat_ready, .feat, .busy, .frame_done
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  // ---- mechanism counters ---------------------------------------------------
  int n_desc_stop, n_wait_load, n_wait_space, n_wait_det, n_out_full, n_in_bp, n_levels;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_tsb.d_start) n_desc_stop++;
    if (u_dut.u_ctrl.busy && !u_dut.u_ctrl.level_start && !u_dut.u_ctrl.det_done &&
        u_dut.u_ctrl.det_ptr >= u_dut.u_ctrl.written) n_wait_load++;
    if (u_dut.u_ctrl.busy && !u_dut.u_ctrl.det_done &&
        u_dut.u_ctrl.det_ptr < u_dut.u_ctrl.written && !u_dut.u_ctrl.det_re) n_wait_space++;
    if (u_dut.u_tsb.adv && u_dut.u_tsb.active && u_dut.u_tsb.q < u_dut.u_tsb.npix &&
        !u_dut.u_tsb.re) n_wait_det++;
    if (u_dut.u_tsb.hit && u_dut.u_tsb.out_full) n_out_full++;
    if (pix_valid && !pix_ready) n_in_bp++;
    if (u_dut.level_start) n_levels++;
  end

  img_t img;
  rec_t exp_q [$];
  int   got = 0;

  // ---- output side: random ready, in-order comparison ----------------------
  always @(posedge clk) begin
    feat_ready <= ($urandom % 4) != 0 && (cycles % 3000) > 600;
    if (rst_n && feat_valid && feat_ready) begin
      rec_t e;
      if (exp_q.size() == 0) begin
        check(0, "unexpected extra record");
      end else begin
        e = exp_q.pop_front();
        check(feat.level == e.level[0] && int'(feat.x) == e.x && int'(feat.y) == e.y,
              $sformatf("record %0d position got L%0d (%0d,%0d) exp L%0d (%0d,%0d)",
                        got, feat.level, feat.x, feat.y, e.level, e.x, e.y));
        check(int'(feat.x_full) == e.xf && int'(feat.y_full) == e.yf,
              $sformatf("record %0d scaled position", got));
        check(feat.desc == e.desc, $sformatf("record %0d descriptor got %h exp %h", got, feat.desc, e.desc));
      end
      got++;
    end
  end

  initial begin
    int nexp;
    img = make_image(W, H, 32'd7);
    frame_records(img, W, H, exp_q);
    nexp = exp_q.size();
    $display("expected records: %0d", nexp);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    for (int i = 0; i < W * H; ) begin
      pix_valid <= ($urandom % 3) != 0;
      pix       <= pix_t'(img[i]);
      @(posedge clk);
      if (pix_valid && pix_ready) i++;
    end
    pix_valid <= 0;
    wait (frame_done);
    repeat (50) @(posedge clk);
    check(got == nexp, $sformatf("record count got %0d exp %0d", got, nexp));
    check(!busy, "busy after frame_done");
    check(nexp > 10, "test image should contain features");
    $display("mechanisms: desc_stop=%0d wait_load=%0d wait_space=%0d wait_det=%0d out_full=%0d in_backpressure=%0d levels=%0d",
             n_desc_stop, n_wait_load, n_wait_space, n_wait_det, n_out_full, n_in_bp, n_levels);
    check(n_desc_stop > 0, "descriptor stop never happened");
    check(n_wait_load > 0, "detection never waited for the frame load");
    check(n_wait_space > 0, "detection never waited for RAM3 room");
    check(n_wait_det > 0, "descriptor path never waited for detection");
    check(n_out_full > 0, "output buffer never full");
    check(n_levels == 2, "two pyramid levels expected");
    $display("cycles=%0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
