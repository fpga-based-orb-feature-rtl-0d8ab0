// tb_image_resize: a 36x30 frame (level 2: 30x25) streams in with random
// gaps. Every level-1 and level-2 write is captured; both images must equal
// the input and the directly computed bilinear image, every address must be
// written exactly once, and in_ready must fall after the last pixel.
// A second frame checks that start restarts the counters.
`timescale 1ns/1ps
module tb_image_resize;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  localparam int W = 36, H = 30, W2 = (5 * W) / 6, H2 = (5 * H) / 6;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0, in_ready, l1_we, l2_we;
  pix_t in_pix = '0, l1_data, l2_data;
  logic [$clog2(W*H)-1:0] l1_addr;
  logic [$clog2(W2*H2)-1:0] l2_addr;
  logic [$clog2(W*H):0] l1_count;
  logic [$clog2(W2*H2):0] l2_count;
  int got1 [W*H], got2 [W2*H2], n1 [W*H], n2 [W2*H2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  image_resize #(.W(W), .H(H)) u_dut (.clk, .rst_n, .start, .in_valid, .in_ready, .in_pix,
    .l1_we, .l1_addr, .l1_data, .l2_we, .l2_addr, .l2_data, .l1_count, .l2_count);

  always @(posedge clk) begin
    if (l1_we) begin got1[l1_addr] = int'(l1_data); n1[l1_addr]++; end
    if (l2_we) begin got2[l2_addr] = int'(l2_data); n2[l2_addr]++; end
  end

  task automatic frame(int unsigned seed);
    img_t img, img2;
    img  = make_image(W, H, seed);
    img2 = resize(img, W, H);
    foreach (n1[i]) n1[i] = 0;
    foreach (n2[i]) n2[i] = 0;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < W * H; ) begin
      in_valid = ($urandom % 3) != 0;
      in_pix   = pix_t'(img[i]);
      @(posedge clk);
      if (in_valid && in_ready) i++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    #1;
    for (int i = 0; i < W * H; i++) begin
      checks++;
      if (got1[i] != int'(img[i]) || n1[i] != 1) failures++;
    end
    for (int i = 0; i < W2 * H2; i++) begin
      checks++;
      if (got2[i] != int'(img2[i]) || n2[i] != 1) begin
        failures++;
        if (failures < 5) $display("FAIL l2[%0d] got %0d exp %0d n=%0d", i, got2[i], img2[i], n2[i]);
      end
    end
    checks += 3;
    if (in_ready) failures++;
    if (int'(l1_count) != W * H) failures++;
    if (int'(l2_count) != W2 * H2) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(32'd5);
    frame(32'd6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
