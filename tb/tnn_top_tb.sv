// tnn_top_tb: end-to-end test of the whole network at full image size and
// reduced channel counts (32x32 images, channels 3-8-8-16-16-32-32, dense
// 512->32->10; the structure, the word widths 16/4/1, the image period of
// 1024 cycles and all rates are those of the full design).
//
// Five random images are streamed back to back, one pixel per cycle. A
// behavioural model of the network (direct convolution loops with zero
// padding, scale/shift + ReLU, 2x2 max pooling, flattening in pixel-major
// order and the two dense layers, all in 16-bit wrap-around arithmetic)
// computes the expected class scores from the weight and constant
// definitions; the scores of the first three images are compared with the
// design. Also checked: one result every W*W cycles (the image period) and
// no FIFO overflow. Every mechanism of the design is counted and must
// occur: zero-padded windows, parallel / word-serial / bit-serial
// convolution results, max-pool bursts, FIFO smoothing (occupancy above
// one) and pacing (a waiting pixel held back), mux-layer groups, dense
// accumulations and ReLU clipping.
module tnn_top_tb;
  import tnn_pkg::*;
  localparam int W = 32, C0 = 3, C1 = 8, C2 = 8, C3 = 16, C4 = 16, C5 = 32, C6 = 32;
  localparam int D1 = 32, NCLS = 10, P = 4, NIMG = 5;
  localparam int NCHK = NIMG - 2;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  logic in_valid = 0, out_valid;
  act_t [C0-1:0] in_pix;
  act_t [NCLS-1:0] out_scores;
  logic [2:0] fifo_overflow;

  tnn_top #(.IMG_W(W), .C0(C0), .C1(C1), .C2(C2), .C3(C3), .C4(C4), .C5(C5), .C6(C6),
            .D1(D1), .NCLS(NCLS), .P(P)) dut (.*);

  // ------------------------------------------------------ reference model
  typedef act_t fm_t [];   // feature map, index (r*w + c)*ch + k

  function automatic fm_t conv(fm_t x, int w, int ci, int co, int layer);
    fm_t y = new[w * w * co];
    int wt [] = new[9 * ci * co];
    for (int i = 0; i < 9 * ci; i++)
      for (int o = 0; o < co; o++) wt[i * co + o] = tern_weight(layer, i, o);
    for (int r = 0; r < w; r++)
      for (int c = 0; c < w; c++)
        for (int o = 0; o < co; o++) begin
          act_t s = 0;
          for (int p = 0; p < 9; p++) begin
            int rr = r + p / 3 - 1;
            int cc = c + 1 - p % 3;
            if (rr >= 0 && rr < w && cc >= 0 && cc < w)
              for (int k = 0; k < ci; k++) begin
                int t = wt[(p * ci + k) * co + o];
                if (t > 0) s += x[(rr * w + cc) * ci + k];
                if (t < 0) s -= x[(rr * w + cc) * ci + k];
              end
          end
          y[(r * w + c) * co + o] = s;
        end
    return y;
  endfunction

  function automatic fm_t ss(fm_t x, int ch, int layer);
    fm_t y = new[x.size()];
    for (int i = 0; i < x.size(); i++) begin
      longint p = longint'(x[i]) * longint'(scale_c(layer, i % ch));
      act_t v = act_t'(p >>> 6) + shift_b(layer, i % ch);
      y[i] = (v < 0) ? act_t'(0) : v;
    end
    return y;
  endfunction

  function automatic fm_t pool(fm_t x, int w, int ch);
    fm_t y = new[(w / 2) * (w / 2) * ch];
    for (int r = 0; r < w / 2; r++)
      for (int c = 0; c < w / 2; c++)
        for (int k = 0; k < ch; k++) begin
          act_t m = x[((2 * r) * w + 2 * c) * ch + k];
          if (x[((2 * r) * w + 2 * c + 1) * ch + k] > m) m = x[((2 * r) * w + 2 * c + 1) * ch + k];
          if (x[((2 * r + 1) * w + 2 * c) * ch + k] > m) m = x[((2 * r + 1) * w + 2 * c) * ch + k];
          if (x[((2 * r + 1) * w + 2 * c + 1) * ch + k] > m) m = x[((2 * r + 1) * w + 2 * c + 1) * ch + k];
          y[(r * (w / 2) + c) * ch + k] = m;
        end
    return y;
  endfunction

  function automatic fm_t dense(fm_t x, int no, int layer);
    fm_t y = new[no];
    for (int o = 0; o < no; o++) begin
      act_t s = 0;
      for (int i = 0; i < x.size(); i++) begin
        int t = tern_weight(layer, i, o);
        if (t > 0) s += x[i];
        if (t < 0) s -= x[i];
      end
      y[o] = s;
    end
    return y;
  endfunction

  function automatic fm_t network(fm_t img);
    fm_t a;
    a = ss(conv(img, W, C0, C1, 1), C1, 1);
    a = ss(conv(a, W, C1, C2, 2), C2, 2);
    a = pool(a, W, C2);
    a = ss(conv(a, W / 2, C2, C3, 3), C3, 3);
    a = ss(conv(a, W / 2, C3, C4, 4), C4, 4);
    a = pool(a, W / 2, C4);
    a = ss(conv(a, W / 4, C4, C5, 5), C5, 5);
    a = ss(conv(a, W / 4, C5, C6, 6), C6, 6);
    a = pool(a, W / 4, C6);
    a = ss(dense(a, D1, 7), D1, 7);
    return dense(a, NCLS, 8);
  endfunction

  fm_t images [NIMG];
  fm_t expected [NIMG];

  // ------------------------------------------------------ result checking
  int nout = 0, t_prev = -1;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (nout < NCHK) begin
        for (int o = 0; o < NCLS; o++) begin
          checks++;
          if (out_scores[o] !== expected[nout][o]) begin
            failures++;
            $display("FAIL: image %0d score %0d got %0d exp %0d", nout, o, out_scores[o], expected[nout][o]);
          end
        end
      end
      if (t_prev >= 0) begin
        checks++;
        if (cyc - t_prev != W * W) begin
          failures++;
          $display("FAIL: results %0d cycles apart, expected %0d", cyc - t_prev, W * W);
        end
      end
      $display("image %0d classified at cycle %0d", nout, cyc);
      t_prev = cyc;
      nout++;
    end
  end

  // ------------------------------------------------------ mechanisms
  int n_pad = 0, n_par = 0, n_word = 0, n_bit = 0, n_pool = 0, max_occ = 0;
  int n_paced = 0, n_mux = 0, n_dense = 0, n_relu = 0;
  always @(posedge clk) begin
    if (!rst) begin
      if (dut.wb1_v && (dut.u_wb1.top_pad || dut.u_wb1.left_pad || dut.u_wb1.bot_pad || dut.u_wb1.right_pad)) n_pad++;
      if (dut.cv1_v) n_par++;
      if (dut.cv3_v) n_word++;
      if (dut.cv5_v) n_bit++;
      if (dut.mp1_v) n_pool++;
      if (int'(dut.u_ff1.count) > max_occ) max_occ = int'(dut.u_ff1.count);
      if (!dut.u_ff1.empty && !dut.ff1_v) n_paced++;
      if (dut.mx1_v) n_mux++;
      if (dut.dn1_v) n_dense++;
      if (dut.ss6_v) for (int k = 0; k < C6; k++) if (dut.ss6_y[k] == 0) n_relu++;
    end
  end

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL: %s never happened", what);
    end
  endtask

  initial begin
    for (int n = 0; n < NIMG; n++) begin
      images[n] = new[W * W * C0];
      for (int i = 0; i < W * W * C0; i++) images[n][i] = act_t'(int'($urandom % 1024) - 256);
      expected[n] = network(images[n]);
    end
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NIMG; n++)
      for (int p = 0; p < W * W; p++) begin
        in_valid = 1;
        for (int k = 0; k < C0; k++) in_pix[k] = images[n][p * C0 + k];
        @(negedge clk);
      end
    in_valid = 0;
    repeat (2 * W * W) @(negedge clk);
    checks++;
    if (nout < NCHK) begin failures++; $display("FAIL: only %0d results", nout); end
    checks++;
    if (fifo_overflow != 0) begin failures++; $display("FAIL: FIFO overflow"); end
    need("zero-padded windows", n_pad);
    need("parallel conv results", n_par);
    need("word-serial conv results", n_word);
    need("bit-serial conv results", n_bit);
    need("max-pool outputs", n_pool);
    need("FIFO occupancy above one", max_occ > 1 ? max_occ : 0);
    need("FIFO pacing hold-offs", n_paced);
    need("mux-layer groups", n_mux);
    need("dense accumulations", n_dense);
    need("ReLU clipped values", n_relu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((NIMG + 4) * W * W) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
