// serial_adder: word- or bit-serial adder/subtractor.
//
// Two operands arrive least significant word first, DW bits per cycle, for
// 16/DW cycles. Each cycle the two words and the stored carry are added;
// the DW-bit sum goes to the output register and the carry out is stored
// for the next word. `start` marks the first (least significant) word of a
// new pair of operands: in that cycle the stored carry is ignored and the
// carry in is 0 for an adder or 1 for a subtractor (SUB = 1), which also
// inverts b, so that a + ~b + 1 = a - b.
//
// With DW equal to the full operand width and start held high the block is
// an ordinary registered parallel adder/subtractor.
//
// Timing: out holds the sum word of the inputs of the previous cycle
// (latency 1); words stream back to back with no idle cycle between
// operands. The carry out of the most significant word is dropped, so
// results wrap modulo 2^(operand width).
//
// From the paper: the structure (adder, carry register reset at the start,
// inverted b and carry 1 for subtraction, output passed to the next adder).
module serial_adder #(
  parameter int DW  = 1,
  parameter bit SUB = 1'b0
) (
  input  logic          clk,
  input  logic          start,
  input  logic [DW-1:0] a,
  input  logic [DW-1:0] b,
  output logic [DW-1:0] out
);

  logic          carry;
  logic          cin;
  logic [DW-1:0] bb;
  logic [DW:0]   sum;

  assign cin = start ? SUB : carry;
  assign bb  = SUB ? ~b : b;
  assign sum = {1'b0, a} + {1'b0, bb} + {{DW{1'b0}}, cin};

  always_ff @(posedge clk) begin
    out   <= sum[DW-1:0];
    carry <= sum[DW];
  end

endmodule
