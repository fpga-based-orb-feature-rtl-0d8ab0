// orb_ctrl: frame sequencer and detection-path read pointer (the control unit).
//
// start launches a frame: the resizing module begins taking pixels and the
// sequencer runs level 1 and then level 2 through the pipeline
// (IDLE -> LEVEL1 -> LEVEL2 -> IDLE, frame_done pulsing at the end). Each level
// begins with a one-cycle level_start and ends when the descriptor path
// reports level_done. Within a level the detection read pointer walks the
// level in raster order, one pixel per cycle, but only over pixels the
// resizer has already written (so level 1 overlaps with loading the frame)
// and only while RAM3 has room for the features that may still be in flight.
// The paper's control unit is driven from an instruction memory whose
// contents are not given; this fixed sequencer is this design's stand-in.
module orb_ctrl
  import orb_pkg::*;
#(
  parameter int W     = IMG_W,
  parameter int H     = IMG_H,
  parameter int AW    = $clog2(W * H),
  parameter int FDEPTH = 1024,
  parameter int FAW   = $clog2(FDEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   written,      // pixels of the current level in RAM1
  input  logic [FAW:0]  ram3_count,
  input  logic          level_done,
  output logic          busy,
  output logic          frame_done,
  output logic          level,
  output logic          level_start,
  output logic [CW-1:0] width,
  output logic [CW-1:0] height,
  output logic          det_re,
  output logic [AW-1:0] det_addr,
  output logic [CW-1:0] det_x,
  output logic [CW-1:0] det_y,
  output logic [AW:0]   det_ptr,
  output logic          det_done
);
  typedef enum logic [1:0] {S_IDLE, S_LEVEL1, S_LEVEL2} state_t;
  localparam int MARGIN = 8;                 // features possibly in flight

  state_t      state;
  logic [AW:0] npix;

  assign busy     = (state != S_IDLE);
  assign level    = (state == S_LEVEL2);
  assign width    = level ? CW'(lvl2_size(W)) : CW'(W);
  assign height   = level ? CW'(lvl2_size(H)) : CW'(H);
  assign npix     = (AW+1)'(width * height);
  assign det_done = (det_ptr == npix);
  assign det_re   = busy && !level_start && !det_done && (det_ptr < written) &&
                    (ram3_count < (FAW+1)'(FDEPTH - MARGIN));
  assign det_addr = AW'(det_ptr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      frame_done  <= 1'b0;
      level_start <= 1'b0;
      det_ptr     <= '0;
      det_x       <= '0;
      det_y       <= '0;
    end else begin
      frame_done  <= 1'b0;
      level_start <= 1'b0;
      if (level_start) begin
        det_ptr <= '0;
        det_x   <= '0;
        det_y   <= '0;
      end else if (det_re) begin
        det_ptr <= det_ptr + 1'b1;
        if (det_x == width - 1'b1) begin det_x <= '0; det_y <= det_y + 1'b1; end
        else                            det_x <= det_x + 1'b1;
      end
      case (state)
        S_IDLE:   if (start) begin state <= S_LEVEL1; level_start <= 1'b1; end
        S_LEVEL1: if (level_done) begin state <= S_LEVEL2; level_start <= 1'b1; end
        S_LEVEL2: if (level_done) begin state <= S_IDLE; frame_done <= 1'b1; end
        default:  state <= S_IDLE;
      endcase
    end
  end
endmodule
