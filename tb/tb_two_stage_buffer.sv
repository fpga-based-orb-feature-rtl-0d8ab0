// tb_two_stage_buffer: the synchronized two-stage line buffers, controller
// and descriptor on a 60x50 image held in a model of RAM1. A model of the
// detection path advances det_ptr with random pauses and makes each FAST
// feature visible in "RAM3" 4 cycles after it passes the feature's detection
// index, and its sin/cos in "RAM2" a few cycles later still. The output
// buffer is randomly full. Every record must match the reference descriptor,
// each descriptor must take 33 cycles from start to rec_valid, and the test
// requires that the window stopped for each feature, waited for RAM2, waited
// for the output buffer and waited for the detection path.
`timescale 1ns/1ps
module tb_two_stage_buffer;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  localparam int W = 60, H = 50, AW = 12;
  logic clk = 0, rst_n = 0, level_start = 0;
  logic re, feat_pop, rec_valid, stalled, level_done, out_full = 0;
  logic [AW-1:0] raddr;
  pix_t rdata = '0;
  logic [AW:0] det_ptr = '0, written = (AW+1)'(W * H);
  logic det_done;
  logic xy_avail, sc_avail;
  logic [CW-1:0] feat_x, feat_y, rec_x, rec_y;
  logic signed [SCW-1:0] sin_q, cos_q;
  logic [NPAIRS-1:0] rec_desc;
  int checks = 0, failures = 0;
  int n_wait_sc = 0, n_wait_out = 0, n_wait_det = 0, n_start = 0;
  longint cyc = 0, t_start = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  two_stage_buffer #(.MAX_W(64), .MAX_H(64), .AW(AW)) u_dut (
    .clk, .rst_n, .level_start, .width(CW'(W)), .height(CW'(H)),
    .re, .raddr, .rdata, .det_ptr, .written, .det_done,
    .xy_avail, .feat_x, .feat_y, .sc_avail, .sin_q, .cos_q, .feat_pop,
    .out_full, .rec_valid, .rec_x, .rec_y, .rec_desc, .stalled, .level_done
  );

  img_t img;
  rec_t exp_q [$];
  int   fx [$], fy [$], fs [$], fc [$];

  assign det_done = (det_ptr == (AW+1)'(W * H));

  // RAM1 model: one-cycle read latency, data held while re is low
  always @(posedge clk) if (re) rdata <= pix_t'(img[raddr]);

  function automatic int det_index(int x, int y);
    return (y + 16) * W + x + 15;
  endfunction

  assign xy_avail = fx.size() > 0 && int'(det_ptr) > det_index(fx[0], fy[0]) + 3;
  assign sc_avail = xy_avail && int'(det_ptr) > det_index(fx[0], fy[0]) + 7;
  assign feat_x   = fx.size() > 0 ? CW'(fx[0]) : '0;
  assign feat_y   = fy.size() > 0 ? CW'(fy[0]) : '0;
  assign sin_q    = fs.size() > 0 ? SCW'(fs[0]) : '0;
  assign cos_q    = fc.size() > 0 ? SCW'(fc[0]) : '0;

  always @(posedge clk) if (rst_n) begin
    if (!det_done && ($urandom % 8) != 0) det_ptr <= det_ptr + 1'b1;
    out_full <= ($urandom % 5) == 0;
    if (stalled && !sc_avail) n_wait_sc++;
    if (stalled && out_full) n_wait_out++;
    if (!re && !stalled && u_dut.active && u_dut.q < u_dut.npix && !u_dut.lead_ok) n_wait_det++;
    if (u_dut.d_start) begin n_start++; t_start = cyc; end
    if (feat_pop) begin
      void'(fx.pop_front()); void'(fy.pop_front()); void'(fs.pop_front()); void'(fc.pop_front());
    end
    if (rec_valid) begin
      rec_t e;
      e = exp_q.pop_front();
      checks += 3;
      if (int'(rec_x) != e.x || int'(rec_y) != e.y) failures++;
      if (rec_desc != e.desc) begin
        failures++;
        $display("FAIL desc at (%0d,%0d)", e.x, e.y);
      end
      if (cyc - t_start != 33) failures++;
    end
  end

  initial begin
    int nexp;
    img = make_image(W, H, 32'd31);
    level_records(img, W, H, 0, exp_q);
    nexp = exp_q.size();
    foreach (exp_q[i]) begin
      int m10, m01, s, c;
      moments(img, W, exp_q[i].x, exp_q[i].y, m10, m01);
      orient(m10, m01, 8, s, c);
      fx.push_back(exp_q[i].x); fy.push_back(exp_q[i].y); fs.push_back(s); fc.push_back(c);
    end
    $display("features: %0d", nexp);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    level_start <= 1;
    @(posedge clk);
    level_start <= 0;
    wait (level_done);
    repeat (3) @(posedge clk);
    checks += 6;
    if (exp_q.size() != 0 || nexp == 0) failures++;
    if (n_start != nexp) failures++;
    if (n_wait_sc == 0) failures++;
    if (n_wait_out == 0) failures++;
    if (n_wait_det == 0) failures++;
    if (fx.size() != 0) failures++;
    $display("starts=%0d wait_sincos=%0d wait_output=%0d wait_detection=%0d", n_start, n_wait_sc, n_wait_out, n_wait_det);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
