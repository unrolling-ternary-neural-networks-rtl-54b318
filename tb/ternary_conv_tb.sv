// ternary_conv_tb: three small convolution layers (4 input and 6 output
// channels) in the three arithmetic styles: parallel 3-input adders,
// 4-bit word serial and bit serial. Random windows are offered at each
// layer's full rate (every cycle, every 4 cycles, every 16 cycles) and each
// output vector is compared, in order, with sum_i w(i,o) * x_i (mod 2^16)
// computed here from the weight definition. The latency of every result is
// checked against LEVELS + 16/DW + 2, and the serial layers are checked to
// refuse a window (in_ready low) while busy.
module ternary_conv_tb;
  import tnn_pkg::*;
  localparam int CI = 4, CO = 6, NWIN = 60;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  act_t [8:0][CI-1:0] win [3];
  logic [2:0] iv = '0, rdy, ov;
  act_t [CO-1:0] os [3];

  ternary_conv #(.LAYER(2), .CH_IN(CI), .CH_OUT(CO), .DW(16), .RADIX(3)) u0 (
    .clk, .rst, .in_valid(iv[0]), .in_ready(rdy[0]), .in_win(win[0]), .out_valid(ov[0]), .out_sum(os[0]));
  ternary_conv #(.LAYER(3), .CH_IN(CI), .CH_OUT(CO), .DW(4), .RADIX(2)) u1 (
    .clk, .rst, .in_valid(iv[1]), .in_ready(rdy[1]), .in_win(win[1]), .out_valid(ov[1]), .out_sum(os[1]));
  ternary_conv #(.LAYER(5), .CH_IN(CI), .CH_OUT(CO), .DW(1), .RADIX(2)) u2 (
    .clk, .rst, .in_valid(iv[2]), .in_ready(rdy[2]), .in_win(win[2]), .out_valid(ov[2]), .out_sum(os[2]));

  localparam int LAYERS [3] = '{2, 3, 5};
  localparam int NWS [3] = '{1, 4, 16};
  localparam int RADS [3] = '{3, 2, 2};
  int LAT [3];

  // Tree depth: levels needed to add all 9*CI inputs with RADIX-input adders.
  function automatic int tree_levels(int radix);
    int mx = 9 * CI, lv = 0;
    while (mx > 1) begin mx = (mx + radix - 1) / radix; lv++; end
    return lv;
  endfunction

  initial for (int l = 0; l < 3; l++) LAT[l] = tree_levels(RADS[l]) + NWS[l] + 2;

  act_t [8:0][CI-1:0] sent [3][NWIN];
  int tsent [3][NWIN];
  int nout [3] = '{0, 0, 0};

  function automatic act_t ref_sum(int l, int n, int o);
    act_t s = 0;
    for (int w = 0; w < 9; w++)
      for (int c = 0; c < CI; c++) begin
        int t = tern_weight(LAYERS[l], w * CI + c, o);
        if (t > 0) s += sent[l][n][w][c];
        if (t < 0) s -= sent[l][n][w][c];
      end
    return s;
  endfunction

  for (genvar l = 0; l < 3; l++) begin : g_chk
    always @(posedge clk) begin
      if (!rst && ov[l]) begin
        automatic int n = nout[l];
        checks++;
        if (cyc - tsent[l][n] != LAT[l]) begin
          failures++;
          $display("FAIL layer style %0d: latency %0d exp %0d", l, cyc - tsent[l][n], LAT[l]);
        end
        for (int o = 0; o < CO; o++) begin
          checks++;
          if (os[l][o] !== ref_sum(l, n, o)) begin
            failures++;
            if (failures < 10) $display("FAIL style %0d win %0d out %0d got %0d exp %0d", l, n, o, os[l][o], ref_sum(l, n, o));
          end
        end
        nout[l]++;
      end
    end

    initial begin
      @(negedge clk); @(negedge clk);
      rst = 0;
      @(negedge clk);
      for (int n = 0; n < NWIN; n++) begin
        for (int w = 0; w < 9; w++)
          for (int c = 0; c < CI; c++) sent[l][n][w][c] = act_t'($urandom % 4096) - act_t'(2048);
        win[l] = sent[l][n];
        iv[l] = 1;
        if (NWS[l] > 1 && n > 0) begin
          checks++;
          if (!rdy[l]) begin failures++; $display("FAIL style %0d not ready at its rate", l); end
        end
        tsent[l][n] = cyc + 1;
        @(negedge clk);
        iv[l] = 0;
        if (NWS[l] > 1) begin
          checks++;
          if (rdy[l]) begin failures++; $display("FAIL style %0d ready while busy", l); end
        end
        repeat (NWS[l] - 1) @(negedge clk);
      end
    end
  end

  initial begin
    wait (nout[0] == NWIN && nout[1] == NWIN && nout[2] == NWIN);
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (16 * NWIN + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (outputs %0d %0d %0d)", nout[0], nout[1], nout[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
