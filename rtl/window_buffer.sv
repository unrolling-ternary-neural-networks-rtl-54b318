// window_buffer: the im2col (buffering) stage in front of every 3x3
// convolution.
//
// Pixels of a W x W image arrive left to right, top to bottom, one whole
// pixel (CH channels) per in_valid. Two row delay lines, Buffer A and
// Buffer B, each W pixels long, hand back the pixel of the same column one
// and two rows earlier. Each of the three rows (newest from the input,
// then Buffer A, then Buffer B) feeds a chain of three registers. After
// every accepted pixel the nine registers hold a 3x3 window whose centre is
// one row up and one column left of the pixel just received.
//
// Window order (out_win[0..8] = a..i): a,b,c come from the Buffer B chain,
// d,e,f from the Buffer A chain and g,h,i from the input chain; within a
// chain the first register is the newest pixel, so a is the top-right and
// i the bottom-left element. With the centre at (r,c):
//   a=(r-1,c+1) b=(r-1,c) c=(r-1,c-1) d=(r,c+1) e=(r,c) f=(r,c-1)
//   g=(r+1,c+1) h=(r+1,c) i=(r+1,c-1).
// Elements that fall outside the image are replaced by zero (zero padding).
//
// Timing: out_valid pulses one cycle after each in_valid, except for the
// first W+1 pixels after reset, which only fill the buffers. Images must
// follow each other back to back in the stream: the last W+1 windows of an
// image are produced while the first W+1 pixels of the next one arrive.
// There is no back-pressure; the producer sets the rate.
//
// From the paper: the two row buffers, the three register chains, the a..i
// naming and the border multiplexing to zero. Own choices: the row buffers
// are circular memories addressed by the column counter, the padding is
// applied combinationally on the register outputs, and the centre position
// is tracked with counters.
module window_buffer
  import tnn_pkg::*;
#(
  parameter int IMG_W = 32,
  parameter int CH    = 3
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  in_valid,
  input  act_t [CH-1:0]         in_pix,
  output logic                  out_valid,
  output act_t [8:0][CH-1:0]    out_win
);

  localparam int CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;

  act_t [CH-1:0] buf_a [IMG_W];
  act_t [CH-1:0] buf_b [IMG_W];
  act_t [2:0][CH-1:0] sr_f, sr_a, sr_b;

  logic [CW-1:0] in_col, in_row;   // position of the arriving pixel
  logic [CW-1:0] cen_col, cen_row; // centre of the window in the registers
  logic [CW:0]   fill;             // pixels seen, saturating at IMG_W+1

  act_t [CH-1:0] a_out, b_out;
  assign a_out = buf_a[in_col];
  assign b_out = buf_b[in_col];

  always_ff @(posedge clk) begin
    if (in_valid) begin
      buf_a[in_col] <= in_pix;
      buf_b[in_col] <= a_out;
      sr_f <= {sr_f[1:0], in_pix};
      sr_a <= {sr_a[1:0], a_out};
      sr_b <= {sr_b[1:0], b_out};
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_col <= '0;
      in_row <= '0;
      cen_col <= '0;
      cen_row <= '0;
      fill <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && (fill == (CW+1)'(IMG_W + 1));
      if (in_valid) begin
        if (fill != (CW+1)'(IMG_W + 1)) fill <= fill + 1'b1;
        // centre = arriving position minus one row and one column
        if (in_col == '0) begin
          cen_col <= CW'(IMG_W - 1);
          cen_row <= (in_row == '0) ? CW'(IMG_W - 2) :
                     (in_row == CW'(1)) ? CW'(IMG_W - 1) : in_row - CW'(2);
        end else begin
          cen_col <= in_col - 1'b1;
          cen_row <= (in_row == '0) ? CW'(IMG_W - 1) : in_row - 1'b1;
        end
        if (in_col == CW'(IMG_W - 1)) begin
          in_col <= '0;
          in_row <= (in_row == CW'(IMG_W - 1)) ? '0 : in_row + 1'b1;
        end else begin
          in_col <= in_col + 1'b1;
        end
      end
    end
  end

  // Zero padding at the borders.
  logic top_pad, bot_pad, left_pad, right_pad;
  assign top_pad   = (cen_row == '0);
  assign bot_pad   = (cen_row == CW'(IMG_W - 1));
  assign left_pad  = (cen_col == '0);
  assign right_pad = (cen_col == CW'(IMG_W - 1));

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      // k = 0: right column, 1: centre column, 2: left column
      logic col_pad;
      col_pad = (k == 0) ? right_pad : (k == 2) ? left_pad : 1'b0;
      out_win[k]     = (top_pad || col_pad) ? '0 : sr_b[k];
      out_win[3 + k] = col_pad              ? '0 : sr_a[k];
      out_win[6 + k] = (bot_pad || col_pad) ? '0 : sr_f[k];
    end
  end

endmodule
