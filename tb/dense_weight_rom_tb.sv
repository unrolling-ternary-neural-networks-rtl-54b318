// dense_weight_rom_tb: reads every row of a small weight ROM (20 inputs,
// 5 outputs, 4 inputs per row) in random order and checks, one cycle after
// each address, every 2-bit field against the code of the ternary weight
// of that input and output, and that all three codes occur.
module dense_weight_rom_tb;
  import tnn_pkg::*;
  localparam int NI = 20, NO = 5, P = 4, ROWS = NI / P;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [$clog2(ROWS)-1:0] addr;
  logic [P*NO*2-1:0] data;
  int seen [3] = '{0, 0, 0};

  dense_weight_rom #(.LAYER(8), .N_IN(NI), .N_OUT(NO), .P(P)) dut (.*);

  initial begin
    for (int n = 0; n < 3 * ROWS; n++) begin
      automatic int r = (n < ROWS) ? n : int'($urandom % ROWS);
      @(negedge clk);
      addr = r;
      @(negedge clk);
      for (int k = 0; k < P; k++)
        for (int o = 0; o < NO; o++) begin
          automatic int w = tern_weight(8, r * P + k, o);
          automatic logic [1:0] exp_code = (w == 1) ? 2'b01 : (w == -1) ? 2'b11 : 2'b00;
          seen[w + 1]++;
          checks++;
          if (data[(k * NO + o) * 2 +: 2] !== exp_code) begin
            failures++;
            $display("FAIL: row %0d in %0d out %0d got %b exp %b", r, k, o, data[(k * NO + o) * 2 +: 2], exp_code);
          end
        end
    end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0) begin failures++; $display("FAIL: not all weight values seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
