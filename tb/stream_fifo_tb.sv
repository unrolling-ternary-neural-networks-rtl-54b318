// stream_fifo_tb: pushes random words in random bursts (never into a full
// FIFO, tracked with a model count) while the consumer's ready toggles at
// random. Checks that words leave in order and unchanged, that at least
// MIN_GAP cycles separate two removals, that out_valid is never high on an
// empty FIFO, that the FIFO did fill up at some point (bursts absorbed),
// and that overflow stays low.
module stream_fifo_tb;
  localparam int WIDTH = 12, DEPTH = 8, GAP = 3, NWORDS = 400;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid, out_ready = 0, overflow;
  logic [WIDTH-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH), .MIN_GAP(GAP)) dut (.*);

  logic [WIDTH-1:0] q [$];
  int model_cnt = 0, max_cnt = 0, last_pop = -100, cyc = 0, npop = 0;

  always @(posedge clk) begin
    cyc++;
    if (!rst) begin
      automatic logic pop = out_valid && out_ready;
      if (out_valid && q.size() == 0) begin
        failures++;
        $display("FAIL: valid while empty");
      end
      if (pop) begin
        checks++;
        if (out_data !== q[0]) begin
          failures++;
          $display("FAIL: word %0d got %h exp %h", npop, out_data, q[0]);
        end
        checks++;
        if (cyc - last_pop < GAP) begin
          failures++;
          $display("FAIL: pops %0d cycles apart", cyc - last_pop);
        end
        last_pop = cyc;
        void'(q.pop_front());
        npop++;
      end
      if (in_valid) q.push_back(in_data);
      if (q.size() > max_cnt) max_cnt = q.size();
      model_cnt = q.size();
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NWORDS; ) begin
      automatic logic burst = ((n / 32) % 2 == 0);
      out_ready <= burst ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
      // push only if the FIFO cannot be full after this cycle's pop
      if ((burst || $urandom % 3 == 0) && model_cnt < DEPTH - 1) begin
        in_valid <= 1;
        in_data <= WIDTH'($urandom);
        n++;
      end else in_valid <= 0;
      @(posedge clk);
    end
    in_valid <= 0;
    out_ready <= 1;
    repeat (NWORDS * GAP) @(posedge clk);
    checks++;
    if (npop != NWORDS) begin failures++; $display("FAIL: %0d words out", npop); end
    checks++;
    if (max_cnt < DEPTH - 1) begin failures++; $display("FAIL: FIFO never filled (%0d)", max_cnt); end
    checks++;
    if (overflow) begin failures++; $display("FAIL: overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
