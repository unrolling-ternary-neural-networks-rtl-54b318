// mux_layer_tb: offers random 16-value vectors to a mux layer that sends
// 4 values per cycle, sometimes back to back, sometimes with idle gaps.
// Checks that every vector leaves as 4 consecutive groups in index order,
// that out_first marks group 0, that in_ready is low while groups remain
// and high on the last group (so vectors can follow without a gap), and
// that the stream is gap-free when vectors follow each other.
module mux_layer_tb;
  import tnn_pkg::*;
  localparam int D = 16, N = 4, M = D / N, NV = 50;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, in_ready, out_valid, out_first;
  act_t [D-1:0] in_vec;
  act_t [N-1:0] out_vals;

  mux_layer #(.D(D), .OUT_N(N)) dut (.*);

  act_t [D-1:0] q [$];
  int grp = 0, nvec = 0;

  always @(posedge clk) begin
    if (!rst) begin
      if (out_valid) begin
        checks += 2;
        if (out_first !== (grp == 0)) begin failures++; $display("FAIL: out_first at group %0d", grp); end
        if (out_vals !== q[0][grp * N +: N]) begin failures++; $display("FAIL: vector %0d group %0d", nvec, grp); end
        checks++;
        if (in_ready !== (grp == M - 1)) begin failures++; $display("FAIL: in_ready %0d at group %0d", in_ready, grp); end
        if (grp == M - 1) begin grp = 0; void'(q.pop_front()); nvec++; end
        else grp++;
      end else if (grp != 0) begin
        failures++; $display("FAIL: gap inside a vector");
      end
      if (in_valid && in_ready) q.push_back(in_vec);
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < NV; n++) begin
      act_t [D-1:0] v;
      for (int k = 0; k < D; k++) v[k] = act_t'($urandom);
      in_vec = v; in_valid = 1;
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 0;
      if (n % 4 == 3) repeat ($urandom % 8) @(negedge clk);
    end
    in_valid = 0;
    repeat (3 * M) @(negedge clk);
    checks++;
    if (nvec != NV) begin failures++; $display("FAIL: %0d vectors out", nvec); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * NV * M) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
