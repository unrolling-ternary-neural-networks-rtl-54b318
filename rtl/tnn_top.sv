// tnn_top: the complete ternary VGG-7 style CNN for 32x32 RGB images,
// unrolled into a streaming pipeline that accepts one pixel per cycle.
//
// Chain of blocks (channels at default parameters):
//   window_buffer 32x32x3  -> conv1 (3->64,    16-bit adders, 3-input) -> scale_shift
//   window_buffer 32x32x64 -> conv2 (64->64,   16-bit adders, 3-input) -> scale_shift
//   maxpool 32->16 -> stream_fifo (releases a pixel every 4 cycles)
//   window_buffer 16x16x64 -> conv3 (64->128,  4-bit word serial)     -> scale_shift
//   window_buffer 16x16x128-> conv4 (128->128, 4-bit word serial)     -> scale_shift
//   maxpool 16->8  -> stream_fifo (a pixel every 16 cycles)
//   window_buffer 8x8x128  -> conv5 (128->256, bit serial)            -> scale_shift
//   window_buffer 8x8x256  -> conv6 (256->256, bit serial)            -> scale_shift
//   maxpool 8->4   -> stream_fifo -> mux_layer (256 values -> 4 per cycle)
//   dense_layer 4096->128 (ROM weights) -> scale_shift
//   mux_layer (128 -> 4 per cycle) -> dense_layer 128->10 -> class scores
//
// Each max pool divides the pixel rate by four, and the convolutions behind
// it use correspondingly narrower serial adders, so every stage keeps up
// with one input pixel per cycle without idle hardware. An image enters in
// W*W cycles, so one classification leaves every W*W cycles.
//
// Interface: in_pix carries the C0 channels of one pixel (Q12.4) with
// in_valid; images follow each other back to back, left to right, top to
// bottom. out_scores holds the NCLS raw scores (Q12.4, no softmax) while
// out_valid pulses, once per image, in image order. The line buffers emit
// the last windows of an image while the next image streams in, so the
// scores of the most recent image appear only once about one further image
// has been streamed. fifo_overflow reports a lost pixel in one of the three
// FIFOs (cannot happen at any input rate up to one pixel per cycle).
//
// Weights and scale/shift constants are elaboration-time constants from
// tnn_pkg (stand-ins; see there). The host link (PCIe/DMA shell) of the
// original system is not part of this RTL.
//
// From the paper: the block sequence, layer sizes, channel counts, the
// 16/4/1-bit adder choice per layer pair, 3-input adders in the first two
// layers, 16-bit activations, the MUX layers and the ROM-based dense
// layers with 4 inputs per cycle. Own choices: the FIFO depths and
// pacing, the mux layer width in front of the last dense layer (4 per
// cycle), and omitting scale/shift after the last layer, as in the
// paper's block table.
module tnn_top
  import tnn_pkg::*;
#(
  parameter int IMG_W = 32,
  parameter int C0    = 3,
  parameter int C1    = 64,
  parameter int C2    = 64,
  parameter int C3    = 128,
  parameter int C4    = 128,
  parameter int C5    = 256,
  parameter int C6    = 256,
  parameter int D1    = 128,
  parameter int NCLS  = 10,
  parameter int P     = 4,
  parameter int DW12  = 16,
  parameter int DW34  = 4,
  parameter int DW56  = 1,
  parameter int FIFO_DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  act_t [C0-1:0]    in_pix,
  output logic             out_valid,
  output act_t [NCLS-1:0]  out_scores,
  output logic [2:0]       fifo_overflow
);

  localparam int W1 = IMG_W;
  localparam int W2 = IMG_W / 2;
  localparam int W3 = IMG_W / 4;
  localparam int W4 = IMG_W / 8;
  localparam int N_FLAT = W4 * W4 * C6;

  // ------------------------------------------------------------ conv1
  logic wb1_v;  act_t [8:0][C0-1:0] wb1_w;
  logic cv1_v;  act_t [C1-1:0] cv1_s;
  logic ss1_v;  act_t [C1-1:0] ss1_y;
  logic cv1_rdy;

  window_buffer #(.IMG_W(W1), .CH(C0)) u_wb1 (
    .clk, .rst, .in_valid(in_valid), .in_pix(in_pix), .out_valid(wb1_v), .out_win(wb1_w));
  ternary_conv #(.LAYER(1), .CH_IN(C0), .CH_OUT(C1), .DW(DW12), .RADIX(3)) u_cv1 (
    .clk, .rst, .in_valid(wb1_v), .in_ready(cv1_rdy), .in_win(wb1_w),
    .out_valid(cv1_v), .out_sum(cv1_s));
  scale_shift #(.LAYER(1), .CH(C1)) u_ss1 (
    .clk, .rst, .in_valid(cv1_v), .in_x(cv1_s), .out_valid(ss1_v), .out_y(ss1_y));

  // ------------------------------------------------------------ conv2
  logic wb2_v;  act_t [8:0][C1-1:0] wb2_w;
  logic cv2_v;  act_t [C2-1:0] cv2_s;
  logic ss2_v;  act_t [C2-1:0] ss2_y;
  logic cv2_rdy;

  window_buffer #(.IMG_W(W1), .CH(C1)) u_wb2 (
    .clk, .rst, .in_valid(ss1_v), .in_pix(ss1_y), .out_valid(wb2_v), .out_win(wb2_w));
  ternary_conv #(.LAYER(2), .CH_IN(C1), .CH_OUT(C2), .DW(DW12), .RADIX(3)) u_cv2 (
    .clk, .rst, .in_valid(wb2_v), .in_ready(cv2_rdy), .in_win(wb2_w),
    .out_valid(cv2_v), .out_sum(cv2_s));
  scale_shift #(.LAYER(2), .CH(C2)) u_ss2 (
    .clk, .rst, .in_valid(cv2_v), .in_x(cv2_s), .out_valid(ss2_v), .out_y(ss2_y));

  // ------------------------------------------------------------ pool 1
  logic mp1_v;  act_t [C2-1:0] mp1_y;
  logic ff1_v;  act_t [C2-1:0] ff1_y;

  maxpool #(.IMG_W(W1), .CH(C2)) u_mp1 (
    .clk, .rst, .in_valid(ss2_v), .in_pix(ss2_y), .out_valid(mp1_v), .out_pix(mp1_y));
  stream_fifo #(.WIDTH(C2 * ACT_W), .DEPTH(FIFO_DEPTH), .MIN_GAP(ACT_W / DW34)) u_ff1 (
    .clk, .rst, .in_valid(mp1_v), .in_data(mp1_y), .out_valid(ff1_v), .out_ready(1'b1),
    .out_data(ff1_y), .overflow(fifo_overflow[0]));

  // ------------------------------------------------------------ conv3
  logic wb3_v;  act_t [8:0][C2-1:0] wb3_w;
  logic cv3_v;  act_t [C3-1:0] cv3_s;
  logic ss3_v;  act_t [C3-1:0] ss3_y;
  logic cv3_rdy;

  window_buffer #(.IMG_W(W2), .CH(C2)) u_wb3 (
    .clk, .rst, .in_valid(ff1_v), .in_pix(ff1_y), .out_valid(wb3_v), .out_win(wb3_w));
  ternary_conv #(.LAYER(3), .CH_IN(C2), .CH_OUT(C3), .DW(DW34), .RADIX(2)) u_cv3 (
    .clk, .rst, .in_valid(wb3_v), .in_ready(cv3_rdy), .in_win(wb3_w),
    .out_valid(cv3_v), .out_sum(cv3_s));
  scale_shift #(.LAYER(3), .CH(C3)) u_ss3 (
    .clk, .rst, .in_valid(cv3_v), .in_x(cv3_s), .out_valid(ss3_v), .out_y(ss3_y));

  // ------------------------------------------------------------ conv4
  logic wb4_v;  act_t [8:0][C3-1:0] wb4_w;
  logic cv4_v;  act_t [C4-1:0] cv4_s;
  logic ss4_v;  act_t [C4-1:0] ss4_y;
  logic cv4_rdy;

  window_buffer #(.IMG_W(W2), .CH(C3)) u_wb4 (
    .clk, .rst, .in_valid(ss3_v), .in_pix(ss3_y), .out_valid(wb4_v), .out_win(wb4_w));
  ternary_conv #(.LAYER(4), .CH_IN(C3), .CH_OUT(C4), .DW(DW34), .RADIX(2)) u_cv4 (
    .clk, .rst, .in_valid(wb4_v), .in_ready(cv4_rdy), .in_win(wb4_w),
    .out_valid(cv4_v), .out_sum(cv4_s));
  scale_shift #(.LAYER(4), .CH(C4)) u_ss4 (
    .clk, .rst, .in_valid(cv4_v), .in_x(cv4_s), .out_valid(ss4_v), .out_y(ss4_y));

  // ------------------------------------------------------------ pool 2
  logic mp2_v;  act_t [C4-1:0] mp2_y;
  logic ff2_v;  act_t [C4-1:0] ff2_y;

  maxpool #(.IMG_W(W2), .CH(C4)) u_mp2 (
    .clk, .rst, .in_valid(ss4_v), .in_pix(ss4_y), .out_valid(mp2_v), .out_pix(mp2_y));
  stream_fifo #(.WIDTH(C4 * ACT_W), .DEPTH(FIFO_DEPTH), .MIN_GAP(ACT_W / DW56)) u_ff2 (
    .clk, .rst, .in_valid(mp2_v), .in_data(mp2_y), .out_valid(ff2_v), .out_ready(1'b1),
    .out_data(ff2_y), .overflow(fifo_overflow[1]));

  // ------------------------------------------------------------ conv5
  logic wb5_v;  act_t [8:0][C4-1:0] wb5_w;
  logic cv5_v;  act_t [C5-1:0] cv5_s;
  logic ss5_v;  act_t [C5-1:0] ss5_y;
  logic cv5_rdy;

  window_buffer #(.IMG_W(W3), .CH(C4)) u_wb5 (
    .clk, .rst, .in_valid(ff2_v), .in_pix(ff2_y), .out_valid(wb5_v), .out_win(wb5_w));
  ternary_conv #(.LAYER(5), .CH_IN(C4), .CH_OUT(C5), .DW(DW56), .RADIX(2)) u_cv5 (
    .clk, .rst, .in_valid(wb5_v), .in_ready(cv5_rdy), .in_win(wb5_w),
    .out_valid(cv5_v), .out_sum(cv5_s));
  scale_shift #(.LAYER(5), .CH(C5)) u_ss5 (
    .clk, .rst, .in_valid(cv5_v), .in_x(cv5_s), .out_valid(ss5_v), .out_y(ss5_y));

  // ------------------------------------------------------------ conv6
  logic wb6_v;  act_t [8:0][C5-1:0] wb6_w;
  logic cv6_v;  act_t [C6-1:0] cv6_s;
  logic ss6_v;  act_t [C6-1:0] ss6_y;
  logic cv6_rdy;

  window_buffer #(.IMG_W(W3), .CH(C5)) u_wb6 (
    .clk, .rst, .in_valid(ss5_v), .in_pix(ss5_y), .out_valid(wb6_v), .out_win(wb6_w));
  ternary_conv #(.LAYER(6), .CH_IN(C5), .CH_OUT(C6), .DW(DW56), .RADIX(2)) u_cv6 (
    .clk, .rst, .in_valid(wb6_v), .in_ready(cv6_rdy), .in_win(wb6_w),
    .out_valid(cv6_v), .out_sum(cv6_s));
  scale_shift #(.LAYER(6), .CH(C6)) u_ss6 (
    .clk, .rst, .in_valid(cv6_v), .in_x(cv6_s), .out_valid(ss6_v), .out_y(ss6_y));

  // ------------------------------------------------------------ pool 3
  logic mp3_v;  act_t [C6-1:0] mp3_y;
  logic ff3_v;  act_t [C6-1:0] ff3_y;
  logic mx1_rdy;

  maxpool #(.IMG_W(W3), .CH(C6)) u_mp3 (
    .clk, .rst, .in_valid(ss6_v), .in_pix(ss6_y), .out_valid(mp3_v), .out_pix(mp3_y));
  stream_fifo #(.WIDTH(C6 * ACT_W), .DEPTH(FIFO_DEPTH), .MIN_GAP(1)) u_ff3 (
    .clk, .rst, .in_valid(mp3_v), .in_data(mp3_y), .out_valid(ff3_v), .out_ready(mx1_rdy),
    .out_data(ff3_y), .overflow(fifo_overflow[2]));

  // ------------------------------------------------------------ dense 1
  logic mx1_v, mx1_first;  act_t [P-1:0] mx1_y;
  logic dn1_v;  act_t [D1-1:0] dn1_s;
  logic ss7_v;  act_t [D1-1:0] ss7_y;

  mux_layer #(.D(C6), .OUT_N(P)) u_mx1 (
    .clk, .rst, .in_valid(ff3_v), .in_ready(mx1_rdy), .in_vec(ff3_y),
    .out_valid(mx1_v), .out_first(mx1_first), .out_vals(mx1_y));
  dense_layer #(.LAYER(7), .N_IN(N_FLAT), .N_OUT(D1), .P(P)) u_dn1 (
    .clk, .rst, .in_valid(mx1_v), .in_x(mx1_y), .out_valid(dn1_v), .out_sum(dn1_s));
  scale_shift #(.LAYER(7), .CH(D1)) u_ss7 (
    .clk, .rst, .in_valid(dn1_v), .in_x(dn1_s), .out_valid(ss7_v), .out_y(ss7_y));

  // ------------------------------------------------------------ dense 2
  logic mx2_v, mx2_first, mx2_rdy;  act_t [P-1:0] mx2_y;

  mux_layer #(.D(D1), .OUT_N(P)) u_mx2 (
    .clk, .rst, .in_valid(ss7_v), .in_ready(mx2_rdy), .in_vec(ss7_y),
    .out_valid(mx2_v), .out_first(mx2_first), .out_vals(mx2_y));
  dense_layer #(.LAYER(8), .N_IN(D1), .N_OUT(NCLS), .P(P)) u_dn2 (
    .clk, .rst, .in_valid(mx2_v), .in_x(mx2_y), .out_valid(out_valid), .out_sum(out_scores));

  // Rate matching: every convolution is offered windows no faster than it
  // accepts them, and the dense-layer vector is taken as soon as it exists.
  assert property (@(posedge clk) disable iff (rst)
    (wb1_v |-> cv1_rdy) and (wb2_v |-> cv2_rdy) and (wb3_v |-> cv3_rdy) and
    (wb4_v |-> cv4_rdy) and (wb5_v |-> cv5_rdy) and (wb6_v |-> cv6_rdy) and
    (ss7_v |-> mx2_rdy))
    else $error("tnn_top: pipeline stage overrun");

endmodule
