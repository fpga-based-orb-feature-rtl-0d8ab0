// tb_orb_full: one complete 640x480 frame through the accelerator with every
// parameter at its default. A synthetic frame is streamed in at one pixel per
// cycle and the output is always ready. All records of both pyramid levels
// (the 533x400 level included) are compared with the behavioural model, and
// the frame time is checked against the reported figure of 14.8 ms at
// 203 MHz, i.e. at most 3,004,400 cycles from start to frame_done.
`timescale 1ns/1ps
module tb_orb_full;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  logic  clk = 0, rst_n = 0, start = 0;
  logic  pix_valid = 0, pix_ready, feat_valid, feat_ready = 1, busy, frame_done;
  pix_t  pix = '0;
  feat_t feat;
  int    checks = 0, failures = 0, got = 0, n_stop = 0;
  longint cycles = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  orb_extractor u_dut (
    .clk, .rst_n, .start, .pix_valid, .pix_ready, .pix,
    .feat_valid, .feat_ready, .feat, .busy, .frame_done
  );

  img_t img;
  rec_t exp_q [$];

  always @(posedge clk) if (rst_n && u_dut.u_tsb.d_start) n_stop++;

  always @(posedge clk) begin
    if (rst_n && feat_valid && feat_ready) begin
      rec_t e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL: unexpected record");
      end else begin
        e = exp_q.pop_front();
        if (!(feat.level == e.level[0] && int'(feat.x) == e.x && int'(feat.y) == e.y &&
              int'(feat.x_full) == e.xf && int'(feat.y_full) == e.yf && feat.desc == e.desc)) begin
          failures++;
          if (failures < 10)
            $display("FAIL: record %0d got L%0d (%0d,%0d) exp L%0d (%0d,%0d)", got, feat.level,
                     feat.x, feat.y, e.level, e.x, e.y);
        end
      end
      got++;
    end
  end

  initial begin
    int nexp;
    longint t0;
    img = make_image(IMG_W, IMG_H, 32'd2017);
    frame_records(img, IMG_W, IMG_H, exp_q);
    nexp = exp_q.size();
    $display("expected records: %0d", nexp);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    t0 = cycles;
    @(posedge clk);
    start <= 0;
    for (int i = 0; i < IMG_W * IMG_H; ) begin
      pix_valid <= 1;
      pix       <= pix_t'(img[i]);
      @(posedge clk);
      if (pix_ready) i++;
    end
    pix_valid <= 0;
    wait (frame_done);
    $display("frame cycles=%0d records=%0d descriptor stops=%0d", cycles - t0, got, n_stop);
    checks++;
    if (cycles - t0 > 64'd3004400) begin
      failures++;
      $display("FAIL: frame took longer than 14.8 ms at 203 MHz");
    end
    repeat (20) @(posedge clk);
    checks++;
    if (got != nexp || nexp == 0) begin
      failures++;
      $display("FAIL: record count %0d expected %0d", got, nexp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
