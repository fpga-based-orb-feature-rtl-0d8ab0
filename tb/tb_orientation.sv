// tb_orientation: word-length reduction and sin/cos against the reference
// model, with the pipeline fed one input per cycle. Inputs cover the full
// +-624750 range, small moments (where the word is padded with zeros), the
// four axis directions and zero. Results must also be within 2% of the exact
// sin/cos computed with real arithmetic. Latency must be 4 cycles.
`timescale 1ns/1ps
module tb_orientation;
  import orb_pkg::*;
  import orb_ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [MW-1:0] m10 = '0, m01 = '0;
  logic signed [SCW-1:0] sin_q, cos_q;
  int checks = 0, failures = 0;
  int a_q [$], b_q [$];
  longint cyc = 0;
  longint t_q [$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  orientation u_dut (.clk, .rst_n, .in_valid, .m10, .m01, .out_valid, .sin_q, .cos_q);

  always @(posedge clk) if (out_valid) begin
    int a, b, s, c;
    real r;
    longint t;
    a = a_q.pop_front();
    b = b_q.pop_front();
    t = t_q.pop_front();
    orient(a, b, 8, s, c);
    checks += 3;
    if (int'(sin_q) != s || int'(cos_q) != c) begin
      failures++;
      if (failures < 5) $display("FAIL m10=%0d m01=%0d got %0d/%0d exp %0d/%0d", a, b, sin_q, cos_q, s, c);
    end
    if (cyc - t != 4) failures++;   // out_valid seen 4 edges after input
    r = $sqrt(real'(a) * a + real'(b) * b);
    if (r > 0 && (absr(sin_q / 256.0 - b / r) > 0.02 || absr(cos_q / 256.0 - a / r) > 0.02))
      failures++;
  end

  function automatic real absr(real v);
    return v < 0 ? -v : v;
  endfunction

  task automatic send(int a, int b);
    @(negedge clk);
    in_valid = 1;
    m10 = MW'(a);
    m01 = MW'(b);
    a_q.push_back(a);
    b_q.push_back(b);
    t_q.push_back(cyc + 1);          // sampled at the next rising edge
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    send(0, 0); send(1000, 0); send(0, 1000); send(-1000, 0); send(0, -1000);
    send(624750, -624750); send(3, -5); send(1, 1);
    for (int t = 0; t < 3000; t++) begin
      int sh;
      sh = $urandom % 21;
      send((int'($urandom % 1249501) - 624750) >>> sh, (int'($urandom % 1249501) - 624750) >>> sh);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (a_q.size() != 0) failures++;
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
