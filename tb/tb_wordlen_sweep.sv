// tb_wordlen_sweep: accuracy of the orientation unit against its word length.
//
// Eight orientation units with N = 3 .. 10 run side by side on the same
// random moments. Each moment pair draws a random magnitude range up to the
// full 21-bit width, because patch moments are often much smaller than their
// worst case. For every result the corner point (15,15) of the patch is
// rotated with x' = x cos + y sin and y' = y cos - x sin. This is done once
// with the unit's sin/cos and once with exact real arithmetic. The error is
// the distance between the two points. (15,15) is where the rotation error is
// largest.
// The test prints the maximum and mean error for each N. It requires three
// things: the mean error must not grow as N grows; the maximum error at N=3
// must exceed the one at N=8; and at N=8, the default, the error must stay
// below half a pixel everywhere, so the rounded sample position moves by at
// most one pixel. The limits are this testbench's own; the error definition
// is the usual Euclidean one.
`timescale 1ns/1ps
module tb_wordlen_sweep;
  import orb_pkg::*;

  localparam int NN = 8;                     // N = 3 .. 10
  localparam int SAMPLES = 20000;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [MW-1:0] m10 = '0, m01 = '0;
  logic [NN-1:0] out_valid;
  logic signed [SCW-1:0] sin_q [NN];
  logic signed [SCW-1:0] cos_q [NN];
  int checks = 0, failures = 0;
  int a_q [$], b_q [$];
  real err_max [NN];
  real err_sum [NN];
  int  err_n = 0;

  always #5 clk = ~clk;

  for (genvar g = 0; g < NN; g++) begin : g_unit
    orientation #(.N(g + 3)) u_dut (
      .clk, .rst_n, .in_valid, .m10, .m01,
      .out_valid(out_valid[g]), .sin_q(sin_q[g]), .cos_q(cos_q[g])
    );
  end

  always @(posedge clk) if (out_valid[0]) begin
    int a, b;
    real r, c, s, xe, ye, xn, yn, e;
    a = a_q.pop_front();
    b = b_q.pop_front();
    r = $sqrt(real'(a) * a + real'(b) * b);
    if (r > 0) begin
      c = a / r;
      s = b / r;
      xe = 15.0 * c + 15.0 * s;
      ye = 15.0 * c - 15.0 * s;
      for (int k = 0; k < NN; k++) begin
        xn = 15.0 * (cos_q[k] / 256.0) + 15.0 * (sin_q[k] / 256.0);
        yn = 15.0 * (cos_q[k] / 256.0) - 15.0 * (sin_q[k] / 256.0);
        e = $sqrt((xe - xn) * (xe - xn) + (ye - yn) * (ye - yn));
        if (e > err_max[k]) err_max[k] = e;
        err_sum[k] += e;
      end
      err_n++;
    end
    if (out_valid != '1) failures++;       // all N share the same latency
    checks++;
  end

  initial begin
    for (int k = 0; k < NN; k++) begin
      err_max[k] = 0.0;
      err_sum[k] = 0.0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < SAMPLES; i++) begin
      int bits, a, b;
      @(negedge clk);
      bits = 4 + int'($urandom % 17);      // magnitudes below 2^4 .. 2^20
      a = int'($urandom % (1 << bits));
      b = int'($urandom % (1 << bits));
      if (a > 577320) a = 577320;
      if (b > 577320) b = 577320;
      if ($urandom % 2) a = -a;
      if ($urandom % 2) b = -b;
      in_valid = 1;
      m10 = MW'(a);
      m01 = MW'(b);
      a_q.push_back(a);
      b_q.push_back(b);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (8) @(posedge clk);

    $display("  N   max error   mean error   (pixels, at point (15,15))");
    for (int k = 0; k < NN; k++)
      $display("%3d   %9.4f   %10.4f", k + 3, err_max[k], err_sum[k] / err_n);
    for (int k = 1; k < NN; k++) begin
      checks++;
      if (err_sum[k] > err_sum[k-1] * 1.02) begin
        failures++;
        $display("FAIL mean error grows from N=%0d to N=%0d", k + 2, k + 3);
      end
    end
    checks++;
    if (!(err_max[0] > err_max[5])) failures++;
    checks++;
    if (err_max[5] >= 0.5) begin
      failures++;
      $display("FAIL max error at N=8 is %f", err_max[5]);
    end
    checks++;
    if (err_n < SAMPLES * 9 / 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(10 * (SAMPLES + 1000));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
