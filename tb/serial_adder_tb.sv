// serial_adder_tb: feeds back-to-back random 16-bit operand pairs, least
// significant word first, into a 4-bit word-serial adder, a 4-bit
// word-serial subtractor and a bit-serial subtractor, reassembles the output
// words and compares them with a + b and a - b (mod 2^16). Operands include
// carry/borrow chains across every word (0xFFFF + 1, 0 - 1).
module serial_adder_tb;
  localparam int NOPS = 200;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic st4 = 0, st1 = 0;
  logic [3:0] a4, b4, add4, sub4;
  logic a1, b1, sub1;

  serial_adder #(.DW(4), .SUB(1'b0)) u_add4 (.clk, .start(st4), .a(a4), .b(b4), .out(add4));
  serial_adder #(.DW(4), .SUB(1'b1)) u_sub4 (.clk, .start(st4), .a(a4), .b(b4), .out(sub4));
  serial_adder #(.DW(1), .SUB(1'b1)) u_sub1 (.clk, .start(st1), .a(a1), .b(b1), .out(sub1));

  logic [15:0] opa [NOPS], opb [NOPS];

  // 4-bit lane
  initial begin
    for (int n = 0; n < NOPS; n++) begin
      opa[n] = (n == 0) ? 16'hFFFF : (n == 1) ? 16'h0000 : 16'($urandom);
      opb[n] = (n == 0) ? 16'h0001 : (n == 1) ? 16'h0001 : 16'($urandom);
    end
    @(negedge clk);
    fork
      begin
        for (int n = 0; n < NOPS; n++)
          for (int k = 0; k < 4; k++) begin
            st4 = (k == 0); a4 = opa[n][4*k +: 4]; b4 = opb[n][4*k +: 4];
            @(negedge clk);
          end
      end
      begin
        @(negedge clk);   // latency 1
        for (int n = 0; n < NOPS; n++) begin
          automatic logic [15:0] ra, rs;
          for (int k = 0; k < 4; k++) begin
            ra[4*k +: 4] = add4; rs[4*k +: 4] = sub4;
            @(negedge clk);
          end
          checks += 2;
          if (ra !== 16'(opa[n] + opb[n])) begin failures++; $display("FAIL add4 %h+%h=%h", opa[n], opb[n], ra); end
          if (rs !== 16'(opa[n] - opb[n])) begin failures++; $display("FAIL sub4 %h-%h=%h", opa[n], opb[n], rs); end
        end
      end
      begin
        for (int n = 0; n < NOPS; n++)
          for (int k = 0; k < 16; k++) begin
            st1 = (k == 0); a1 = opa[n][k]; b1 = opb[n][k];
            @(negedge clk);
          end
      end
      begin
        @(negedge clk);
        for (int n = 0; n < NOPS; n++) begin
          automatic logic [15:0] rs;
          for (int k = 0; k < 16; k++) begin
            rs[k] = sub1;
            @(negedge clk);
          end
          checks++;
          if (rs !== 16'(opa[n] - opb[n])) begin failures++; $display("FAIL sub1 %h-%h=%h", opa[n], opb[n], rs); end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * NOPS + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
