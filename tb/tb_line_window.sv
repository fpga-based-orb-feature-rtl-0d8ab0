// tb_line_window: line buffers + register bank (K=7 and K=31) against a
// stored image. Pixels of a 40-pixel-wide image stream in with random gaps;
// after each shift every window position is compared with the pixel the
// timing rule predicts: win[i][j] = pixel (c-K+1+j, r-K+i) for the pixel
// (c,r) just shifted in (checked where that column lies in the same line).
// A clear followed by a second image of another width is also checked.
`timescale 1ns/1ps
module tb_line_window;
  import orb_pkg::*;

  localparam int MAXW = 48;
  logic clk = 0, rst_n = 0, clear = 0, shift = 0;
  logic [5:0] width = 6'd40;
  pix_t pix = '0;
  pix_t win7 [7][7];
  pix_t win31 [31][31];
  int checks = 0, failures = 0;
  int img [48*40];

  always #5 clk = ~clk;

  line_window #(.K(7),  .MAX_W(MAXW), .XW(6)) u_k7  (.clk, .rst_n, .clear, .width, .shift, .pix, .win(win7));
  line_window #(.K(31), .MAX_W(MAXW), .XW(6)) u_k31 (.clk, .rst_n, .clear, .width, .shift, .pix, .win(win31));

  task automatic run(int w, int h);
    for (int n = 0; n < w * h; n++) img[n] = $urandom % 256;
    width <= 6'(w);
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    for (int n = 0; n < w * h; ) begin
      if ($urandom % 4 == 0) begin
        shift <= 0;
        @(posedge clk);
      end else begin
        int c, r;
        shift <= 1;
        pix   <= pix_t'(img[n]);
        @(posedge clk);
        shift <= 0;
        c = n % w;
        r = n / w;
        #1;
        if (r >= 7 && c >= 6) begin
          for (int i = 0; i < 7; i++) for (int j = 0; j < 7; j++) begin
            checks++;
            if (int'(win7[i][j]) != img[(r - 7 + i) * w + c - 6 + j]) failures++;
          end
        end
        if (r >= 31 && c >= 30) begin
          for (int i = 0; i < 31; i += 5) for (int j = 0; j < 31; j += 3) begin
            checks++;
            if (int'(win31[i][j]) != img[(r - 31 + i) * w + c - 30 + j]) failures++;
          end
        end
        n++;
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    run(40, 36);
    run(33, 34);
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
