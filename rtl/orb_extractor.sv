// orb_extractor: ORB feature extraction accelerator (top level).
//
// A gray-scale frame (640x480 by default) streams in one pixel per cycle
// through the input buffer. The resizing module stores it as pyramid level 1
// and a 1/1.2 bilinear copy (533x400) as level 2 in RAM1. Each level then
// runs through two paths that read RAM1 independently:
//  * detection: LB1/RB1 (31 lines, 31x31 window) -> FAST test and patch
//    moments -> orientation (8-bit word length) ; the (x,y) of every feature
//    goes to RAM3 and its sin/cos to RAM2;
//  * description: the synchronized two-stage line buffers (LB2/RB2 -> 7x7
//    Gaussian -> LB3/RB3) stop whenever the 31x31 smoothed window is centred
//    on the next feature of RAM3, and the steered-BRIEF unit computes its
//    256-bit descriptor.
// Records (level, coordinates, coordinates scaled back to the input image,
// descriptor) leave through the output buffer on a valid/ready stream.
// The block structure follows the paper; the bus side (DMA/AXI, instruction
// memory) is not part of this RTL and appears as the two streams.
// Interface: pulse start (while busy is low) and supply W*H pixels on
// pix_valid/pix_ready; records appear on feat_valid/feat_ready; frame_done
// pulses when both levels are finished and busy falls.
module orb_extractor
  import orb_pkg::*;
#(
  parameter int W          = IMG_W,
  parameter int H          = IMG_H,
  parameter int FDEPTH     = 1024,
  parameter int IBUF_DEPTH = 64,
  parameter int OBUF_DEPTH = 16,
  parameter int PPC        = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  pix_valid,
  output logic  pix_ready,
  input  pix_t  pix,
  output logic  feat_valid,
  input  logic  feat_ready,
  output feat_t feat,
  output logic  busy,
  output logic  frame_done
);
  localparam int W2  = lvl2_size(W);
  localparam int H2  = lvl2_size(H);
  localparam int AW  = $clog2(W * H);
  localparam int A2W = $clog2(W2 * H2);
  localparam int FAW = $clog2(FDEPTH);
  localparam int SW  = CW + 2;

  // ---------------- input buffer and resizing ----------------------------
  logic ib_full, ib_empty, rs_ready;
  pix_t ib_dout;
  logic [$clog2(IBUF_DEPTH):0] ib_count;

  sync_fifo #(.DW(8), .DEPTH(IBUF_DEPTH)) u_input_buffer (
    .clk, .rst_n, .push(pix_valid && !ib_full), .din(pix),
    .pop(rs_ready && !ib_empty), .dout(ib_dout),
    .full(ib_full), .empty(ib_empty), .count(ib_count)
  );
  assign pix_ready = !ib_full;

  logic           l1_we, l2_we;
  logic [AW-1:0]  l1_addr;
  logic [A2W-1:0] l2_addr;
  pix_t           l1_data, l2_data;
  logic [AW:0]    l1_count;
  logic [A2W:0]   l2_count;

  image_resize #(.W(W), .H(H)) u_resize (
    .clk, .rst_n, .start(start && !busy),
    .in_valid(!ib_empty), .in_ready(rs_ready), .in_pix(ib_dout),
    .l1_we, .l1_addr, .l1_data, .l2_we, .l2_addr, .l2_data,
    .l1_count, .l2_count
  );

  // ---------------- control unit -------------------------------------------
  logic          level, level_start, level_done, det_re, det_done;
  logic [CW-1:0] width, height, det_x, det_y;
  logic [AW-1:0] det_addr;
  logic [AW:0]   det_ptr;
  logic [FAW:0]  ram3_count, ram2_count;
  logic [AW:0]   written;

  assign written = level ? (AW+1)'(l2_count) : l1_count;

  orb_ctrl #(.W(W), .H(H), .AW(AW), .FDEPTH(FDEPTH)) u_ctrl (
    .clk, .rst_n, .start,
    .written(written),
    .ram3_count, .level_done, .busy, .frame_done, .level, .level_start,
    .width, .height, .det_re, .det_addr, .det_x, .det_y, .det_ptr, .det_done
  );

  // ---------------- RAM1: one bank per level --------------------------------
  logic          tsb_re;
  logic [AW-1:0] tsb_addr;
  pix_t          a1_rdata, b1_rdata, a2_rdata, b2_rdata;

  frame_ram #(.DEPTH(W * H), .AW(AW)) u_ram1_level1 (
    .clk, .we(l1_we), .waddr(l1_addr), .wdata(l1_data),
    .re_a(det_re && !level), .raddr_a(det_addr), .rdata_a(a1_rdata),
    .re_b(tsb_re && !level), .raddr_b(tsb_addr), .rdata_b(b1_rdata)
  );

  frame_ram #(.DEPTH(W2 * H2), .AW(A2W)) u_ram1_level2 (
    .clk, .we(l2_we), .waddr(l2_addr), .wdata(l2_data),
    .re_a(det_re && level), .raddr_a(A2W'(det_addr)), .rdata_a(a2_rdata),
    .re_b(tsb_re && level), .raddr_b(A2W'(tsb_addr)), .rdata_b(b2_rdata)
  );

  // ---------------- detection path: LB1/RB1, detector, orientation --------
  logic                 d_v, w_v, p_v, or_v;
  logic [CW-1:0]        d_x, d_y;
  logic signed [SW-1:0] cx, cy;
  logic [CW-1:0]        p_x, p_y;
  pix_t                 rb1 [PATCH][PATCH];
  logic                 is_corner, f_v;
  logic signed [MW-1:0] m10, m01, p_m10, p_m01;
  logic signed [SCW-1:0] or_sin, or_cos;

  line_window #(.K(PATCH), .MAX_W(W), .XW(CW)) u_lb1_rb1 (
    .clk, .rst_n, .clear(level_start), .width,
    .shift(d_v), .pix(level ? a2_rdata : a1_rdata), .win(rb1)
  );

  feature_detect u_detect (.win(rb1), .is_corner, .m10, .m01);

  logic signed [SW-1:0] x_hi, y_hi;
  assign x_hi = $signed({2'b00, width})  - SW'(EDGE + 1);
  assign y_hi = $signed({2'b00, height}) - SW'(EDGE + 1);
  assign f_v  = w_v && is_corner &&
                cx >= SW'(EDGE) && cx <= x_hi && cy >= SW'(EDGE) && cy <= y_hi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {d_v, w_v, p_v} <= '0;
      d_x <= '0; d_y <= '0; cx <= '0; cy <= '0;
      p_x <= '0; p_y <= '0; p_m10 <= '0; p_m01 <= '0;
    end else begin
      d_v <= det_re;
      if (det_re) begin d_x <= det_x; d_y <= det_y; end
      w_v <= d_v && !level_start;
      if (d_v) begin
        cx <= SW'(d_x) - SW'(HP);
        cy <= SW'(d_y) - SW'(HP + 1);
      end
      p_v <= f_v;
      if (f_v) begin
        p_x   <= CW'(cx);
        p_y   <= CW'(cy);
        p_m10 <= m10;
        p_m01 <= m01;
      end
    end
  end

  orientation #(.N(WL_N)) u_orient (
    .clk, .rst_n, .in_valid(p_v), .m10(p_m10), .m01(p_m01),
    .out_valid(or_v), .sin_q(or_sin), .cos_q(or_cos)
  );

  // ---------------- RAM3 (x,y) and RAM2 (sin,cos) ---------------------------
  logic                  xy_empty, sc_empty, xy_full, sc_full, feat_pop;
  logic [2*CW-1:0]       xy_head;
  logic [2*SCW-1:0]      sc_head;

  sync_fifo #(.DW(2 * CW), .DEPTH(FDEPTH)) u_ram3 (
    .clk, .rst_n, .push(p_v), .din({p_x, p_y}), .pop(feat_pop),
    .dout(xy_head), .full(xy_full), .empty(xy_empty), .count(ram3_count)
  );

  sync_fifo #(.DW(2 * SCW), .DEPTH(FDEPTH)) u_ram2 (
    .clk, .rst_n, .push(or_v), .din({or_sin, or_cos}), .pop(feat_pop),
    .dout(sc_head), .full(sc_full), .empty(sc_empty), .count(ram2_count)
  );

  // ---------------- descriptor path ---------------------------------------
  logic                ob_full, ob_empty, rec_valid, stalled;
  logic [CW-1:0]       rec_x, rec_y, x_full, y_full;
  logic [NPAIRS-1:0]   rec_desc;
  logic [$clog2(OBUF_DEPTH):0] ob_count;
  feat_t               rec;

  two_stage_buffer #(.MAX_W(W), .MAX_H(H), .AW(AW), .PPC(PPC)) u_tsb (
    .clk, .rst_n, .level_start, .width, .height,
    .re(tsb_re), .raddr(tsb_addr), .rdata(level ? b2_rdata : b1_rdata),
    .det_ptr, .written, .det_done,
    .xy_avail(!xy_empty), .feat_x(xy_head[2*CW-1:CW]), .feat_y(xy_head[CW-1:0]),
    .sc_avail(!sc_empty), .sin_q(sc_head[2*SCW-1:SCW]), .cos_q(sc_head[SCW-1:0]),
    .feat_pop, .out_full(ob_full), .rec_valid, .rec_x, .rec_y, .rec_desc,
    .stalled, .level_done
  );

  scale_recover u_scale (.level, .x(rec_x), .y(rec_y), .x_full, .y_full);

  assign rec = '{level: level, x: rec_x, y: rec_y, x_full: x_full, y_full: y_full,
                 desc: rec_desc};

  // ---------------- output buffer ------------------------------------------
  sync_fifo #(.DW($bits(feat_t)), .DEPTH(OBUF_DEPTH)) u_output_buffer (
    .clk, .rst_n, .push(rec_valid), .din(rec),
    .pop(feat_ready && !ob_empty), .dout(feat),
    .full(ob_full), .empty(ob_empty), .count(ob_count)
  );
  assign feat_valid = !ob_empty;

  // RAM2/RAM3 never overflow: the detection read pointer waits for room.
  assert property (@(posedge clk) disable iff (!rst_n) !(p_v && xy_full));
  assert property (@(posedge clk) disable iff (!rst_n) !(or_v && sc_full));
endmodule
