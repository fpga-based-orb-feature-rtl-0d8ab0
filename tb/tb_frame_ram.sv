// tb_frame_ram: RAM1 bank with one write and two read ports. Random data is
// written, then both ports read random addresses at the same time (1-cycle
// latency) and must return the stored bytes; a read port whose enable is low
// must hold its last data.
`timescale 1ns/1ps
module tb_frame_ram;
  localparam int DEPTH = 1000, AW = 10;
  logic clk = 0, we = 0, re_a = 0, re_b = 0;
  logic [AW-1:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [7:0] wdata = '0, rdata_a, rdata_b;
  int ref_mem [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  frame_ram #(.DEPTH(DEPTH), .AW(AW)) u_dut (.clk, .we, .waddr, .wdata, .re_a, .raddr_a, .rdata_a,
                                             .re_b, .raddr_b, .rdata_b);

  initial begin
    for (int n = 0; n < DEPTH; n++) begin
      ref_mem[n] = $urandom % 256;
      we <= 1; waddr <= AW'(n); wdata <= 8'(ref_mem[n]);
      @(posedge clk);
    end
    we <= 0;
    for (int t = 0; t < 2000; t++) begin
      int a, b, hold_b;
      a = $urandom % DEPTH;
      b = $urandom % DEPTH;
      re_a <= 1; raddr_a <= AW'(a);
      re_b <= 1; raddr_b <= AW'(b);
      @(posedge clk);
      re_a <= 0; re_b <= 0;
      raddr_b <= AW'((b + 1) % DEPTH);
      #1;
      checks += 2;
      if (int'(rdata_a) != ref_mem[a]) failures++;
      if (int'(rdata_b) != ref_mem[b]) failures++;
      @(posedge clk);
      #1;
      checks++;
      if (int'(rdata_b) != ref_mem[b]) failures++;
    end
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
