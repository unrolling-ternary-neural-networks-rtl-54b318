// scale_shift_tb: random Q12.4 activations (including values whose result
// is negative, to exercise ReLU) through an 8-channel scale-and-shift
// block with and without ReLU. Each output is compared one cycle later
// with ((x * c) / 64, rounded toward minus infinity) + b computed with
// wide integers here, clipped at zero for the ReLU instance.
module scale_shift_tb;
  import tnn_pkg::*;
  localparam int CH = 8, NV = 200, LAYER = 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, nrelu = 0;
  logic in_valid = 0, ov_r, ov_n;
  act_t [CH-1:0] x, y_r, y_n;

  scale_shift #(.LAYER(LAYER), .CH(CH), .RELU(1'b1)) u_r (.clk, .rst, .in_valid, .in_x(x), .out_valid(ov_r), .out_y(y_r));
  scale_shift #(.LAYER(LAYER), .CH(CH), .RELU(1'b0)) u_n (.clk, .rst, .in_valid, .in_x(x), .out_valid(ov_n), .out_y(y_n));

  function automatic longint floor_div64(longint v);
    return (v >= 0) ? v / 64 : -((-v + 63) / 64);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NV; n++) begin
      act_t [CH-1:0] xs;
      for (int c = 0; c < CH; c++) xs[c] = act_t'(int'($urandom % 8192) - 4096);
      x = xs; in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 2;
      if (!ov_r || !ov_n) begin failures++; $display("FAIL: out_valid not one cycle after in_valid"); end
      for (int c = 0; c < CH; c++) begin
        automatic longint e = floor_div64(longint'(xs[c]) * longint'(scale_c(LAYER, c))) + longint'(shift_b(LAYER, c));
        automatic act_t en = act_t'(e);
        automatic act_t er = (en < 0) ? act_t'(0) : en;
        if (en < 0) nrelu++;
        checks += 2;
        if (y_n[c] !== en) begin failures++; $display("FAIL no-relu ch %0d x %0d got %0d exp %0d", c, xs[c], y_n[c], en); end
        if (y_r[c] !== er) begin failures++; $display("FAIL relu ch %0d x %0d got %0d exp %0d", c, xs[c], y_r[c], er); end
      end
      if (n % 3 == 0) @(negedge clk);
    end
    checks++;
    if (nrelu == 0) begin failures++; $display("FAIL: ReLU never clipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10 * NV) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
