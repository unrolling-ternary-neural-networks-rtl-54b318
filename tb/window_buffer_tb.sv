// window_buffer_tb: streams three back-to-back 6x6 images with random
// input gaps through a window_buffer and compares every 3x3 window with
// one cut directly from the stored images (zero outside the image). Also
// checks the worked example of the 6x6 figure (centre pixel 20: a = 15,
// c = 13, g = 27, i = 25) and that each window appears exactly one cycle
// after the pixel that completes it.
module window_buffer_tb;
  import tnn_pkg::*;
  localparam int W = 6, CH = 2, NIMG = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0;
  act_t [CH-1:0] in_pix;
  logic out_valid;
  act_t [8:0][CH-1:0] out_win;
  int checks = 0, failures = 0;

  window_buffer #(.IMG_W(W), .CH(CH)) dut (.*);

  act_t img [NIMG][W][W][CH];
  int nout = 0;
  logic prev_in_valid = 0;
  int first_after = 0;

  // expected element
  function automatic act_t px(int n, int r, int c, int ch);
    if (r < 0 || r >= W || c < 0 || c >= W) return '0;
    return img[n][r][c][ch];
  endfunction

  always @(posedge clk) begin
    prev_in_valid <= in_valid;
    if (!rst && out_valid) begin
      automatic int n = nout / (W * W);
      automatic int r = (nout % (W * W)) / W;
      automatic int c = nout % W;
      checks++;
      if (!prev_in_valid) begin
        failures++;
        $display("FAIL: window %0d not one cycle after an input", nout);
      end
      if (n < NIMG) begin
        for (int w = 0; w < 9; w++)
          for (int ch = 0; ch < CH; ch++) begin
            automatic int dr = w / 3 - 1;
            automatic int dc = 1 - (w % 3);
            checks++;
            if (out_win[w][ch] !== px(n, r + dr, c + dc, ch)) begin
              failures++;
              if (failures < 10) $display("FAIL: img %0d (%0d,%0d) elem %0d ch %0d got %0d exp %0d",
                n, r, c, w, ch, out_win[w][ch], px(n, r + dr, c + dc, ch));
            end
          end
        // figure example: image 0 holds pixel index in channel 0
        if (n == 0 && r == 3 && c == 2) begin
          checks++;
          if (!(out_win[0][0] == 15 && out_win[2][0] == 13 && out_win[4][0] == 20 &&
                out_win[6][0] == 27 && out_win[8][0] == 25)) begin
            failures++;
            $display("FAIL: figure example window wrong");
          end
        end
      end
      nout++;
    end
  end

  initial begin
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++)
          for (int ch = 0; ch < CH; ch++)
            img[n][r][c][ch] = (n == 0 && ch == 0) ? act_t'(r * W + c) : act_t'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NIMG + 1; n++)
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++) begin
          while ($urandom % 3 == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          for (int ch = 0; ch < CH; ch++) in_pix[ch] <= (n < NIMG) ? img[n][r][c][ch] : act_t'($urandom);
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != (NIMG + 1) * W * W - (W + 1)) begin
      failures++;
      $display("FAIL: %0d windows, expected %0d", nout, (NIMG + 1) * W * W - (W + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
