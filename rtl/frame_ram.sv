// frame_ram: one bank of RAM1, the frame memory that holds a pyramid level.
//
// One synchronous write port (from the resizing module) and two independent
// synchronous read ports: port A feeds the feature detection path (LB1/RB1),
// port B the descriptor path (LB2/RB2). The paper draws separate arrows from
// RAM1 to LB1 and to LB2; giving each its own read port is this design's
// choice. Read data appears one cycle after the read enable and holds while
// the enable is low, so a stalled reader keeps its pixel.
module frame_ram #(
  parameter int DEPTH = 640 * 480,
  parameter int DW    = 8,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re_a,
  input  logic [AW-1:0] raddr_a,
  output logic [DW-1:0] rdata_a,
  input  logic          re_b,
  input  logic [AW-1:0] raddr_b,
  output logic [DW-1:0] rdata_b
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re_a) rdata_a <= mem[raddr_a];
  end

  always_ff @(posedge clk) begin
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule
