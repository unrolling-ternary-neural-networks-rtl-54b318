// maxpool: 2x2 max pool with stride 2 on a pixel stream.
//
// Pixels of a W x W image arrive one per in_valid, left to right, top to
// bottom. The comparison of the four inputs is spread over the cycles in
// which they arrive: at every odd column the pixel is compared, channel by
// channel, with the one before it (horizontal pair). On even rows this
// pair maximum is parked in a line buffer of W/2 pixels; on odd rows it is
// compared with the parked value of the same column pair and the result is
// the output pixel. Output is therefore bursty: one pixel for every second
// input on odd rows, nothing on even rows, so a FIFO must follow
// (stream_fifo). Output image: W/2 x W/2 pixels.
//
// Timing: out_valid pulses one cycle after the in_valid of the bottom-right
// pixel of each 2x2 block. No back-pressure.
//
// From the paper: the k x k max over each channel, stride 2, the pipelined
// multi-cycle comparison and the bursty output. Own choices: k = 2 (the
// network halves the image at each pool), signed comparison, and the line
// buffer holding horizontal pair maxima.
module maxpool
  import tnn_pkg::*;
#(
  parameter int IMG_W = 32,
  parameter int CH    = 64
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  act_t [CH-1:0] in_pix,
  output logic          out_valid,
  output act_t [CH-1:0] out_pix
);

  localparam int CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int HW = IMG_W / 2;

  logic [CW-1:0] col, row;
  act_t [CH-1:0] prev;            // pixel at the even column
  act_t [CH-1:0] hmax;            // max of the horizontal pair
  act_t [CH-1:0] line [HW];       // pair maxima of the even row

  always_comb begin
    for (int c = 0; c < CH; c++)
      hmax[c] = (in_pix[c] > prev[c]) ? in_pix[c] : prev[c];
  end

  localparam int PW = (HW > 1) ? $clog2(HW) : 1;
  logic [PW-1:0] pair;             // index of the column pair
  assign pair = PW'(col >> 1);

  always_ff @(posedge clk) begin
    if (in_valid) begin
      if (!col[0]) prev <= in_pix;
      if (col[0] && !row[0]) line[pair] <= hmax;
      if (col[0] && row[0]) begin
        for (int c = 0; c < CH; c++)
          out_pix[c] <= (hmax[c] > line[pair][c]) ? hmax[c] : line[pair][c];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      col <= '0;
      row <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && col[0] && row[0];
      if (in_valid) begin
        if (col == CW'(IMG_W - 1)) begin
          col <= '0;
          row <= (row == CW'(IMG_W - 1)) ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

endmodule
