// add_tree_tb: three adder trees, a parallel 3-input tree (7 operands,
// one spare register level), a 4-bit word-serial 2-input tree (5 operands)
// and a bit-serial 2-input tree (6 operands). Random operand sets enter
// back to back; each sum is compared with the sum modulo 2^16 computed in
// the testbench, at exactly LEVELS cycles after its first word, and
// start_out is checked to mark that word.
module add_tree_tb;
  localparam int NSETS = 100;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [6:0][15:0] pin;  logic [15:0] pout;  logic pst_o;
  logic [4:0][3:0]  win;  logic [3:0]  wout;  logic wst, wst_o;
  logic [5:0][0:0]  bin;  logic [0:0]  bout;  logic bst, bst_o;

  add_tree #(.N(7), .RADIX(3), .DW(16), .LEVELS(3)) u_par (.clk, .start(1'b1), .in(pin), .out(pout), .start_out(pst_o));
  add_tree #(.N(5), .RADIX(2), .DW(4),  .LEVELS(3)) u_wrd (.clk, .start(wst), .in(win), .out(wout), .start_out(wst_o));
  add_tree #(.N(6), .RADIX(2), .DW(1),  .LEVELS(3)) u_bit (.clk, .start(bst), .in(bin), .out(bout), .start_out(bst_o));

  logic [15:0] pv [NSETS][7], wv [NSETS][5], bv [NSETS][6];

  function automatic logic [15:0] sum7(int n); logic [15:0] s = 0; for (int k = 0; k < 7; k++) s += pv[n][k]; return s; endfunction
  function automatic logic [15:0] sum5(int n); logic [15:0] s = 0; for (int k = 0; k < 5; k++) s += wv[n][k]; return s; endfunction
  function automatic logic [15:0] sum6(int n); logic [15:0] s = 0; for (int k = 0; k < 6; k++) s += bv[n][k]; return s; endfunction

  initial begin
    for (int n = 0; n < NSETS; n++) begin
      for (int k = 0; k < 7; k++) pv[n][k] = 16'($urandom);
      for (int k = 0; k < 5; k++) wv[n][k] = (n == 0) ? 16'hFFFF : 16'($urandom);
      for (int k = 0; k < 6; k++) bv[n][k] = 16'($urandom);
    end
    @(negedge clk);
    fork
      for (int n = 0; n < NSETS; n++) begin
        for (int k = 0; k < 7; k++) pin[k] = pv[n][k];
        @(negedge clk);
      end
      begin
        repeat (3) @(negedge clk);
        for (int n = 0; n < NSETS; n++) begin
          checks++;
          if (pout !== sum7(n)) begin failures++; $display("FAIL par set %0d got %h exp %h", n, pout, sum7(n)); end
          @(negedge clk);
        end
      end
      for (int n = 0; n < NSETS; n++)
        for (int w = 0; w < 4; w++) begin
          wst = (w == 0);
          for (int k = 0; k < 5; k++) win[k] = wv[n][k][4*w +: 4];
          @(negedge clk);
        end
      begin
        repeat (3) @(negedge clk);
        for (int n = 0; n < NSETS; n++) begin
          automatic logic [15:0] r;
          checks++;
          if (!wst_o) begin failures++; $display("FAIL word start_out"); end
          for (int w = 0; w < 4; w++) begin r[4*w +: 4] = wout; @(negedge clk); end
          checks++;
          if (r !== sum5(n)) begin failures++; $display("FAIL word set %0d got %h exp %h", n, r, sum5(n)); end
        end
      end
      for (int n = 0; n < NSETS; n++)
        for (int w = 0; w < 16; w++) begin
          bst = (w == 0);
          for (int k = 0; k < 6; k++) bin[k] = bv[n][k][w];
          @(negedge clk);
        end
      begin
        repeat (3) @(negedge clk);
        for (int n = 0; n < NSETS; n++) begin
          automatic logic [15:0] r;
          checks++;
          if (!bst_o) begin failures++; $display("FAIL bit start_out"); end
          for (int w = 0; w < 16; w++) begin r[w] = bout; @(negedge clk); end
          checks++;
          if (r !== sum6(n)) begin failures++; $display("FAIL bit set %0d got %h exp %h", n, r, sum6(n)); end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (16 * NSETS + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
