// stream_fifo: synchronous FIFO that turns a bursty stream into a steady
// one, with an optional minimum spacing between the words it releases.
//
// A write happens on every in_valid. The head word is offered on out_data
// with out_valid; it is removed in a cycle where out_valid and out_ready are
// both high. out_valid is held low for MIN_GAP-1 cycles after each removal,
// so a consumer that can take at most one word every MIN_GAP cycles (a word-
// or bit-serial convolution, which needs 16/word_width cycles per pixel) is
// never overrun: this is how the pixel rate is matched between layers.
//
// overflow is a sticky flag set by a write into a full FIFO (the word is
// dropped); an assertion reports it as an error in simulation. The flag
// never rises when DEPTH is large enough for the burst pattern of the
// layer feeding the FIFO.
//
// Timing: a word written in cycle t can leave in cycle t+1 (first-word
// fall-through from a register array, read combinationally).
//
// From the paper: a FIFO after each max pool to absorb its bursts. Own
// choices: depth, the pacing counter and the overflow flag (the original
// used a vendor FIFO core).
module stream_fifo #(
  parameter int WIDTH   = 16,
  parameter int DEPTH   = 16,
  parameter int MIN_GAP = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             overflow
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int GW = (MIN_GAP > 1) ? $clog2(MIN_GAP) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic [GW-1:0] gap;
  logic          pop, push, full, empty;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign out_valid = !empty && (gap == '0);
  assign out_data  = mem[rd_ptr];
  assign pop  = out_valid && out_ready;
  assign push = in_valid && !full;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count <= '0;
      gap <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (pop) gap <= GW'(MIN_GAP - 1);
      else if (gap != '0) gap <= gap - 1'b1;
      if (in_valid && full) overflow <= 1'b1;
    end
  end

  // A write into a full FIFO loses data.
  assert property (@(posedge clk) disable iff (rst) !(in_valid && full))
    else $error("stream_fifo: write while full");

endmodule
