// tb_orb_ctrl: the frame sequencer with a 24x18 frame (level 2: 20x15).
// The written-pixel count grows with random gaps and RAM3's fill level is
// driven at random. Each cycle the detection read must obey the rules
// (only written pixels, only with room in RAM3, never past the level) and
// det_x/det_y must match det_ptr. level_done is given some cycles after
// detection ends; the test checks level/width/height of both levels, the
// level_start and frame_done pulses, and that each read index is issued once.
`timescale 1ns/1ps
module tb_orb_ctrl;
  import orb_pkg::*;

  localparam int W = 24, H = 18, AW = 9, FDEPTH = 16;
  logic clk = 0, rst_n = 0, start = 0, level_done = 0;
  logic busy, frame_done, level, level_start, det_re, det_done;
  logic [AW:0] written = '0, det_ptr;
  logic [4:0] ram3_count = '0;
  logic [CW-1:0] width, height, det_x, det_y;
  logic [AW-1:0] det_addr;
  int checks = 0, failures = 0, reads = 0, n_ls = 0, n_fd = 0, n_space = 0, n_load = 0;

  always #5 clk = ~clk;

  orb_ctrl #(.W(W), .H(H), .AW(AW), .FDEPTH(FDEPTH)) u_dut (
    .clk, .rst_n, .start, .written, .ram3_count, .level_done, .busy, .frame_done,
    .level, .level_start, .width, .height, .det_re, .det_addr, .det_x, .det_y,
    .det_ptr, .det_done
  );

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n && busy && !level_start) begin
    int w, h;
    w = level ? 20 : 24;
    h = level ? 15 : 18;
    chk(int'(width) == w && int'(height) == h, "level size");
    chk(int'(det_x) == int'(det_ptr) % w && int'(det_y) == int'(det_ptr) / w, "det_x/det_y");
    chk(int'(det_addr) == int'(det_ptr), "det_addr");
    if (det_re) begin
      chk(det_ptr < written, "read of an unwritten pixel");
      chk(int'(ram3_count) < FDEPTH - 8, "read without RAM3 room");
      chk(int'(det_ptr) < w * h, "read past the level");
      reads++;
    end else if (!det_done) begin
      if (det_ptr >= written) n_load++; else n_space++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (level_start) n_ls++;
    if (frame_done) n_fd++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    for (int l = 0; l < 2; l++) begin
      int n;
      n = l ? 300 : 432;
      written <= '0;
      @(posedge clk);
      while (!det_done) begin
        if (written < (AW+1)'(n) && $urandom % 3 != 0) written <= written + 1'b1;
        ram3_count <= 5'($urandom % 12);
        @(posedge clk);
      end
      repeat (5) @(posedge clk);
      level_done <= 1;
      @(posedge clk);
      level_done <= 0;
      @(posedge clk);
    end
    repeat (3) @(posedge clk);
    chk(reads == 432 + 300, $sformatf("reads %0d", reads));
    chk(n_ls == 2, "two level_start pulses");
    chk(n_fd == 1, $sformatf("one frame_done pulse, got %0d (levels %0d)", n_fd, n_ls));
    chk(!busy, "idle at the end");
    chk(n_space > 0 && n_load > 0, "both wait reasons seen");
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
