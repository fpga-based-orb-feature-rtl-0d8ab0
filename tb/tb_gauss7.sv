// tb_gauss7: 7x7 Gaussian against the reference model on random windows,
// a flat window (must return the same value) and an all-255 window.
`timescale 1ns/1ps
module tb_gauss7;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  pix_t win [7][7];
  pix_t pix;
  int checks = 0, failures = 0;

  gauss7 u_dut (.win, .pix);

  initial begin
    img_t img;
    img = new[49];
    for (int t = 0; t < 300; t++) begin
      for (int n = 0; n < 49; n++) begin
        img[n] = (t == 0) ? 255 : (t == 1) ? 77 : $urandom % 256;
        win[n / 7][n % 7] = pix_t'(img[n]);
      end
      #1;
      checks++;
      if (int'(pix) != gauss(img, 7, 3, 3)) begin
        failures++;
        $display("FAIL t=%0d got %0d exp %0d", t, pix, gauss(img, 7, 3, 3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
