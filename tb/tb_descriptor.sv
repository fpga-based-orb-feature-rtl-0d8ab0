// tb_descriptor: steered BRIEF unit against the reference model.
// Random 31x31 windows and random orientations (including the axis angles)
// are applied; the 256-bit result is compared with orb_ref_pkg::brief, and
// the time from start to done is checked to be NPAIRS/PPC = 32 cycles.
`timescale 1ns/1ps
module tb_descriptor;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [SCW-1:0] sin_q = '0, cos_q = '0;
  pix_t win [PATCH][PATCH];
  logic [NPAIRS-1:0] desc;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  descriptor u_dut (.clk, .rst_n, .start, .sin_q, .cos_q, .win, .busy, .done, .desc);

  initial begin
    int w [31][31];
    int s, c, lat;
    real th;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 40; t++) begin
      for (int j = 0; j < 31; j++)
        for (int i = 0; i < 31; i++) begin
          w[j][i] = $urandom % 256;
          win[j][i] = pix_t'(w[j][i]);
        end
      th = (t < 4) ? t * 1.5707963 : ($urandom % 6283) / 1000.0;
      s = int'($floor(256.0 * $sin(th) + 0.5));
      c = int'($floor(256.0 * $cos(th) + 0.5));
      sin_q <= SCW'(s);
      cos_q <= SCW'(c);
      start <= 1;
      @(posedge clk);
      start <= 0;
      lat = 1;
      while (!done) begin @(posedge clk); lat++; end
      #1;
      checks++;
      if (desc !== brief(w, s, c)) begin
        failures++;
        $display("FAIL t=%0d s=%0d c=%0d got %h exp %h", t, s, c, desc, brief(w, s, c));
      end
      checks++;
      if (lat != NPAIRS / 8 + 2) begin  // start latch + 32 steps + done register
        failures++;
        $display("FAIL latency %0d", lat);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
