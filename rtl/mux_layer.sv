// mux_layer: turns a wide vector that arrives rarely into a narrow steady
// stream.
//
// A vector of D values is captured into registers when in_valid and
// in_ready are both high. Over the next M = D / OUT_N cycles a multi-cycle
// multiplexer sends OUT_N values per cycle, in index order (values
// 0..OUT_N-1 first). in_ready is high when the block is idle or sending its
// last group, so vectors can follow each other without a gap. This narrows
// the bus from the last max pool (256 values every 64 cycles) to the dense
// layer (4 values every cycle).
//
// Timing: the first group appears one cycle after the vector is accepted;
// out_first marks the group carrying values 0..OUT_N-1 of a vector.
//
// From the paper: buffering D values in registers and a multi-cycle MUX
// producing D/M values per cycle. Own choices: the ready/valid handshake on
// the input and the out_first marker.
module mux_layer
  import tnn_pkg::*;
#(
  parameter int D     = 256,
  parameter int OUT_N = 4
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             in_valid,
  output logic             in_ready,
  input  act_t [D-1:0]     in_vec,
  output logic             out_valid,
  output logic             out_first,
  output act_t [OUT_N-1:0] out_vals
);

  localparam int M  = D / OUT_N;
  localparam int MW = (M > 1) ? $clog2(M) : 1;

  act_t [D-1:0] held;
  logic [MW-1:0] sel;
  logic          busy;

  assign in_ready  = !busy || (sel == MW'(M - 1));
  assign out_valid = busy;
  assign out_first = busy && (sel == '0);
  assign out_vals  = held[sel * OUT_N +: OUT_N];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) held <= in_vec;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      sel <= '0;
    end else if (in_valid && in_ready) begin
      busy <= 1'b1;
      sel <= '0;
    end else if (busy) begin
      if (sel == MW'(M - 1)) busy <= 1'b0;
      else sel <= sel + 1'b1;
    end
  end

  initial assert (D % OUT_N == 0) else $error("mux_layer: D must be a multiple of OUT_N");

endmodule
