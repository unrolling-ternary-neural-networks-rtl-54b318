// add_tree: pipelined adder tree, parallel or word/bit serial.
//
// Sums N operands. Level 1 adds groups of RADIX inputs (2- or 3-input
// adders), each following level adds groups of RADIX results of the level
// before, and every adder output is a register, so the tree has one
// register stage per level. A group with a single member becomes a plain
// register (the Reg(h) of a pruned tree). LEVELS may exceed the number of
// levels N needs; the extra levels are registers, which lets several trees
// of different sizes finish in the same cycle.
//
// Operands are 16-bit values handed over DW bits per cycle, least
// significant word first. With DW = 16 each adder is an ordinary parallel
// adder. With DW < 16 each adder is a serial adder (see serial_adder): it
// keeps its carry in a register from word to word and clears it when the
// start flag, which travels down the tree with the data, marks the first
// word of a new operand set. Results wrap modulo 2^16.
//
// Timing: out is the sum of the words presented LEVELS cycles earlier;
// start_out is `start` delayed by LEVELS cycles. A new operand set (DW =
// 16) or a new word (DW < 16) may enter every cycle.
//
// From the paper: registered adder trees with 2- or 3-input adders, word
// and bit serial adders with a carry register. Own choices: the grouping
// of operands into a balanced tree (the original generated irregular trees
// shaped by subexpression sharing).
module add_tree
  import tnn_pkg::*;
#(
  parameter int N      = 8,
  parameter int RADIX  = 2,
  parameter int DW     = 16,
  parameter int LEVELS = 3
) (
  input  logic                  clk,
  input  logic                  start,
  input  logic [N-1:0][DW-1:0]  in,
  output logic [DW-1:0]         out,
  output logic                  start_out
);

  localparam bit SERIAL = (DW < ACT_W);

  // Number of nodes at level l.
  function automatic int lvl_n(int l);
    int m = N;
    for (int k = 0; k < l; k++) m = (m + RADIX - 1) / RADIX;
    return m;
  endfunction

  logic [LEVELS:0] st;
  assign st[0] = start;
  if (LEVELS > 0) begin : g_st
    always_ff @(posedge clk) st[LEVELS:1] <= st[LEVELS-1:0];
  end
  assign start_out = st[LEVELS];

  for (genvar L = 0; L <= LEVELS; L++) begin : g_lvl
    localparam int NC = lvl_n(L);
    logic [DW-1:0] v [NC];
    if (L == 0) begin : g_in
      for (genvar k = 0; k < NC; k++) begin : g_k
        assign v[k] = in[k];
      end
    end else begin : g_add
      localparam int NP = lvl_n(L - 1);
      logic [1:0]    cy    [NC];
      logic [DW-1:0] v_nxt [NC];
      logic [1:0]    cy_nxt[NC];
      always_comb begin
        for (int j = 0; j < NC; j++) begin
          logic [DW+1:0] s;
          s = (SERIAL && !st[L-1]) ? {{DW{1'b0}}, cy[j]} : '0;
          for (int m = 0; m < RADIX; m++)
            if (RADIX * j + m < NP) s = s + {2'b00, g_lvl[L-1].v[RADIX * j + m]};
          v_nxt[j]  = s[DW-1:0];
          cy_nxt[j] = s[DW+1:DW];
        end
      end
      always_ff @(posedge clk) begin
        for (int j = 0; j < NC; j++) begin
          v[j]  <= v_nxt[j];
          cy[j] <= cy_nxt[j];
        end
      end
    end
  end

  assign out = g_lvl[LEVELS].v[0];

  initial begin
    assert (LEVELS >= clog_r(N, RADIX))
      else $error("add_tree: LEVELS too small for N");
  end

endmodule
