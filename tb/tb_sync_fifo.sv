// tb_sync_fifo: FIFO against a queue model under random push/pop, including
// runs to full and to empty; checks dout, full, empty and count every cycle.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [11:0] din = '0, dout;
  logic [3:0] count;
  int q [$];
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  always #5 clk = ~clk;

  sync_fifo #(.DW(12), .DEPTH(8)) u_dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 4000; t++) begin
      int bias;
      bias = (t / 500) % 2 ? 3 : 1;           // phases that fill and that drain
      @(negedge clk);
      checks += 3;
      if (int'(count) != q.size()) failures++;
      if (full != (q.size() == 8)) failures++;
      if (empty != (q.size() == 0)) failures++;
      if (q.size() > 0) begin
        checks++;
        if (int'(dout) != q[0]) failures++;
      end
      if (full) n_full++;
      if (empty) n_empty++;
      push = (q.size() < 8) && ($urandom % 4 < bias);
      pop  = (q.size() > 0) && ($urandom % 4 < 4 - bias);
      din  = 12'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(int'(din));
      push = 0;
      pop  = 0;
    end
    checks += 2;
    if (n_full == 0) failures++;
    if (n_empty == 0) failures++;
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
