// tb_scale_recover: every coordinate 0..639 on both levels; level 2 must
// give round(1.2*x), computed here in real arithmetic, level 1 the input.
`timescale 1ns/1ps
module tb_scale_recover;
  import orb_pkg::*;
  logic level;
  logic [CW-1:0] x, y, x_full, y_full;
  int checks = 0, failures = 0;

  scale_recover u_dut (.level, .x, .y, .x_full, .y_full);

  initial begin
    for (int l = 0; l < 2; l++)
      for (int v = 0; v < 640; v++) begin
        int e;
        level = l[0];
        x = CW'(v);
        y = CW'((v * 7) % 533);
        #1;
        e = l ? int'($floor(1.2 * v + 0.5)) : v;
        checks += 2;
        if (int'(x_full) != e) failures++;
        e = l ? int'($floor(1.2 * ((v * 7) % 533) + 0.5)) : (v * 7) % 533;
        if (int'(y_full) != e) failures++;
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
