// maxpool_tb: streams three random 8x8 images (3 channels, random gaps)
// through a 2x2 stride-2 max pool and compares every output pixel, in
// order, with the maximum of its 2x2 block computed from the stored
// images. Checks the output count (16 per image), that outputs appear only
// one cycle after an input on an odd row, i.e. in bursts, and that no
// output appears in even rows.
module maxpool_tb;
  import tnn_pkg::*;
  localparam int W = 8, CH = 3, NIMG = 3;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0;
  act_t [CH-1:0] in_pix;
  logic out_valid;
  act_t [CH-1:0] out_pix;
  int checks = 0, failures = 0;

  maxpool #(.IMG_W(W), .CH(CH)) dut (.*);

  act_t img [NIMG][W][W][CH];
  int nout = 0;
  int in_row = 0;
  logic prev_v = 0;
  int prev_row = 0, drv_row = 0;

  always @(posedge clk) begin
    prev_v <= in_valid;
    prev_row <= drv_row;
    if (!rst && out_valid) begin
      automatic int n = nout / ((W / 2) * (W / 2));
      automatic int r = (nout % ((W / 2) * (W / 2))) / (W / 2);
      automatic int c = nout % (W / 2);
      checks++;
      if (!prev_v || prev_row % 2 != 1) begin
        failures++;
        $display("FAIL: output %0d not right after an odd-row input", nout);
      end
      for (int ch = 0; ch < CH; ch++) begin
        automatic act_t m = img[n][2*r][2*c][ch];
        if (img[n][2*r][2*c+1][ch] > m) m = img[n][2*r][2*c+1][ch];
        if (img[n][2*r+1][2*c][ch] > m) m = img[n][2*r+1][2*c][ch];
        if (img[n][2*r+1][2*c+1][ch] > m) m = img[n][2*r+1][2*c+1][ch];
        checks++;
        if (out_pix[ch] !== m) begin
          failures++;
          if (failures < 10) $display("FAIL: img %0d (%0d,%0d) ch %0d got %0d exp %0d", n, r, c, ch, out_pix[ch], m);
        end
      end
      nout++;
    end
  end

  initial begin
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++)
          for (int ch = 0; ch < CH; ch++) img[n][r][c][ch] = act_t'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++) begin
          while ($urandom % 4 == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          drv_row <= r;
          for (int ch = 0; ch < CH; ch++) in_pix[ch] <= img[n][r][c][ch];
          @(posedge clk);
        end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != NIMG * W * W / 4) begin
      failures++;
      $display("FAIL: %0d outputs, expected %0d", nout, NIMG * W * W / 4);
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
