// tb_feature_detect: FAST test and moments against the reference model.
// Windows are cut from a synthetic image at every interior position, plus
// all-255 windows (largest moments) and half-bright windows; is_corner, m10
// and m01 are compared. The test also requires both corners and non-corners.
`timescale 1ns/1ps
module tb_feature_detect;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  pix_t win [31][31];
  logic is_corner;
  logic signed [MW-1:0] m10, m01;
  int checks = 0, failures = 0, n_corner = 0;

  feature_detect u_dut (.win, .is_corner, .m10, .m01);

  task automatic try(img_t img, int w, int x, int y);
    int e10, e01;
    bit ec;
    for (int j = 0; j < 31; j++)
      for (int i = 0; i < 31; i++) win[j][i] = pix_t'(img[(y + j - 15) * w + x + i - 15]);
    #1;
    ec = fast(img, w, x, y);
    moments(img, w, x, y, e10, e01);
    checks += 3;
    if (is_corner != ec) failures++;
    if (int'(m10) != e10) failures++;
    if (int'(m01) != e01) begin
      failures++;
      if (failures < 5) $display("FAIL at (%0d,%0d) m01 %0d exp %0d", x, y, m01, e01);
    end
    if (ec) n_corner++;
  endtask

  initial begin
    img_t img, flat;
    img = make_image(80, 70, 32'd99);
    for (int y = 15; y < 55; y++)
      for (int x = 15; x < 65; x++) try(img, 80, x, y);
    flat = new[31 * 31];
    for (int n = 0; n < 31 * 31; n++) flat[n] = ((n % 31) >= 16) ? 255 : 0;
    try(flat, 31, 15, 15);
    checks++;
    if (int'(m10) != 255 * 2264) failures++;       // right half of the disc
    for (int n = 0; n < 31 * 31; n++) flat[n] = ((n / 31) < 15) ? 255 : 0;
    try(flat, 31, 15, 15);
    checks++;
    if (int'(m01) != -255 * 2264) failures++;
    checks += 2;
    if (n_corner == 0) failures++;
    if (n_corner == checks) failures++;
    $display("corners=%0d", n_corner);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
