// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// Used for the Input Buffer (pixels), the Output Buffer (feature records) and
// for RAM2 (sin/cos) and RAM3 (x,y) of each feature point, which are written
// in detection order and read in the same order by the descriptor path. The
// paper names these memories; their depth, and the use as FIFOs, are this
// design's choices.
// Interface: push/din when !full, pop when !empty; dout shows the oldest
// entry combinationally. count gives the fill level. Push and pop may happen
// in the same cycle.
module sync_fifo #(
  parameter int DW    = 8,
  parameter int DEPTH = 64,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] din,
  input  logic          pop,
  output logic [DW-1:0] dout,
  output logic          full,
  output logic          empty,
  output logic [AW:0]   count
);
  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push && !full) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop && !empty) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  // A push into a full FIFO or a pop from an empty one is a protocol error.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
