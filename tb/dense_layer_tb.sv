// dense_layer_tb: streams five random 32-value vectors, 4 values per
// in_valid with random idle cycles, into a dense layer with 6 outputs.
// Each output vector is compared with sum_i w(i,o) * x_i (mod 2^16)
// computed here from the weight definition, and its out_valid is checked
// to come 3 + log2(4) = 5 cycles after the last group of the vector.
module dense_layer_tb;
  import tnn_pkg::*;
  localparam int NI = 32, NO = 6, P = 4, NV = 5, LAYER = 7;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0, t_last = 0, nout = 0;
  always @(posedge clk) cyc++;
  logic in_valid = 0, out_valid;
  act_t [P-1:0] in_x;
  act_t [NO-1:0] out_sum;
  act_t vecs [NV][NI];
  int t_lasts [NV];

  dense_layer #(.LAYER(LAYER), .N_IN(NI), .N_OUT(NO), .P(P)) dut (.*);

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (cyc - t_lasts[nout] != 5) begin failures++; $display("FAIL: latency %0d", cyc - t_lasts[nout]); end
      for (int o = 0; o < NO; o++) begin
        automatic act_t s = 0;
        for (int i = 0; i < NI; i++) begin
          if (tern_weight(LAYER, i, o) > 0) s += vecs[nout][i];
          if (tern_weight(LAYER, i, o) < 0) s -= vecs[nout][i];
        end
        checks++;
        if (out_sum[o] !== s) begin failures++; $display("FAIL: vec %0d out %0d got %0d exp %0d", nout, o, out_sum[o], s); end
      end
      nout++;
    end
  end

  initial begin
    for (int n = 0; n < NV; n++) for (int i = 0; i < NI; i++) vecs[n][i] = act_t'($urandom);
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NV; n++)
      for (int g = 0; g < NI / P; g++) begin
        while ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        for (int k = 0; k < P; k++) in_x[k] = vecs[n][g * P + k];
        t_lasts[n] = cyc + 1;
        @(negedge clk);
      end
    in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("FAIL: %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
