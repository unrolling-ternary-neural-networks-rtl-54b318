// ternary_conv: a 3x3 convolution layer whose ternary weights are fixed in
// the circuit, built as pruned adder trees.
//
// Each output channel o computes y_o = sum_i t(i,o) * x_i over the
// NIN = 9*CH_IN inputs of the window, with t in {-1,0,+1}. Because the
// weights are known when the circuit is generated, there are no multipliers
// and no weight storage: inputs with weight 0 are simply not connected,
// inputs with weight +1 go to a "positive" adder tree, inputs with weight -1
// to a "negative" adder tree, and one subtractor forms P - N. The weight
// pattern therefore lives entirely in the routing. Both trees of every
// output are padded to the same depth so that all CH_OUT results of a
// window are ready in the same cycle. The weights come from
// tnn_pkg::tern_weight(LAYER, i, o), evaluated at elaboration.
//
// Word width DW selects the arithmetic style, to match the pixel rate of
// the layer: DW = 16 uses parallel adders and accepts a window every cycle;
// DW = 4 (word serial) or DW = 1 (bit serial) feeds each 16-bit input in
// 16/DW words, least significant first, through serial adders that are
// 16/DW times smaller, and so accepts one window every 16/DW cycles. The
// serialiser at the input and the deserialiser at the output are part of
// this block. RADIX is 3 (3-input adders) or 2.
//
// Interface: in_win[w][c] is window element w (a..i = 0..8, see
// window_buffer) of input channel c; input index i = w*CH_IN + c.
// in_ready is low while a serial computation still needs the held window;
// a window offered while in_ready is low is an error (assertion).
// out_sum holds the 16-bit sums of all output channels while out_valid.
//
// Timing: latency from in_valid to out_valid is LEVELS + 16/DW + 2 cycles,
// with LEVELS = ceil(log_RADIX(9*CH_IN)) (see LATENCY). Trees needing fewer
// levels are topped up with plain registers.
//
// From the paper: the pruned ternary adder tree with zero weights removed,
// registered adders, 2/3-input adders, and 16-bit / 4-bit word / bit serial
// arithmetic per layer. Own choices: splitting each sum into a positive and
// a negative tree (this keeps every adder an addition, with a single
// subtraction per output), balanced trees, and no sharing of common
// subexpressions between outputs (the original shared partial sums found by
// an offline subexpression-elimination program, which reduces area but not
// the function).
module ternary_conv
  import tnn_pkg::*;
#(
  parameter int LAYER  = 1,
  parameter int CH_IN  = 3,
  parameter int CH_OUT = 64,
  parameter int DW     = 16,
  parameter int RADIX  = 3
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  act_t [8:0][CH_IN-1:0]  in_win,
  output logic                   out_valid,
  output act_t [CH_OUT-1:0]      out_sum
);

  localparam int NIN = 9 * CH_IN;
  localparam int NW  = ACT_W / DW;          // words per operand
  localparam int WCW = (NW > 1) ? $clog2(NW) : 1;

  typedef int idx_list_t [NIN + 1];

  // Element 0: number of inputs of output o with weight sgn; elements
  // 1..n: their indices.
  function automatic idx_list_t nz_list(int o, int sgn);
    idx_list_t l;
    int n = 0;
    l = '{default: 0};
    for (int i = 0; i < NIN; i++)
      if (tern_weight(LAYER, i, o) == sgn) begin
        l[n + 1] = i;
        n++;
      end
    l[0] = n;
    return l;
  endfunction

  // Tree depth: enough for an output whose NIN weights all have one sign,
  // so it is known without scanning the weights of every output.
  localparam int LEVELS  = clog_r(NIN, RADIX);
  localparam int LATENCY = LEVELS + NW + 2;

  // ---------------------------------------------------------------- input
  act_t [NIN-1:0]    xin;
  logic              busy;
  logic [WCW-1:0]    wcnt;
  logic              accept;
  logic [NIN-1:0][DW-1:0] xw;              // current word of every input

  assign in_ready = !busy || (wcnt == WCW'(NW - 1));
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (accept) xin <= in_win;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy <= 1'b0;
      wcnt <= '0;
    end else if (accept) begin
      busy <= 1'b1;
      wcnt <= '0;
    end else if (busy) begin
      if (wcnt == WCW'(NW - 1)) busy <= 1'b0;
      else wcnt <= wcnt + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < NIN; i++) xw[i] = xin[i][wcnt * DW +: DW];
  end

  // Start flag travels with the first word. In parallel mode every word is
  // a whole operand, so the adders never carry between cycles.
  logic st0;
  assign st0 = (NW == 1) ? 1'b1 : (busy && wcnt == '0);

  // Valid/start pipeline to the deserialiser: LEVELS tree stages plus the
  // subtractor.
  logic [LEVELS+1:0] st_pipe;
  assign st_pipe[0] = busy && wcnt == '0;
  always_ff @(posedge clk) begin
    if (rst) st_pipe[LEVELS+1:1] <= '0;
    else     st_pipe[LEVELS+1:1] <= st_pipe[LEVELS:0];
  end

  // ---------------------------------------------------------------- trees
  logic [CH_OUT-1:0][DW-1:0] rword;   // result word of each output

  for (genvar o = 0; o < CH_OUT; o++) begin : g_out
    localparam idx_list_t PL = nz_list(o, 1);
    localparam idx_list_t NL = nz_list(o, -1);
    localparam int NPOS = PL[0];
    localparam int NNEG = NL[0];
    localparam int NP1  = (NPOS > 0) ? NPOS : 1;
    localparam int NN1  = (NNEG > 0) ? NNEG : 1;

    logic [NP1-1:0][DW-1:0] pleaf;
    logic [NN1-1:0][DW-1:0] nleaf;
    logic [DW-1:0] psum, nsum;
    logic          pst, nst;

    always_comb begin
      pleaf = '0;
      nleaf = '0;
      for (int k = 0; k < NPOS; k++) pleaf[k] = xw[PL[k + 1]];
      for (int k = 0; k < NNEG; k++) nleaf[k] = xw[NL[k + 1]];
    end

    add_tree #(.N(NP1), .RADIX(RADIX), .DW(DW), .LEVELS(LEVELS)) u_pos (
      .clk(clk), .start(st0), .in(pleaf), .out(psum), .start_out(pst));
    add_tree #(.N(NN1), .RADIX(RADIX), .DW(DW), .LEVELS(LEVELS)) u_neg (
      .clk(clk), .start(st0), .in(nleaf), .out(nsum), .start_out(nst));

    serial_adder #(.DW(DW), .SUB(1'b1)) u_sub (
      .clk(clk), .start(pst), .a(psum), .b(nsum), .out(rword[o]));
  end

  // ---------------------------------------------------------- deserialise
  logic [WCW-1:0] oc;
  logic [WCW-1:0] wi;
  logic           col;
  assign col = st_pipe[LEVELS+1] || (oc != '0);
  assign wi  = st_pipe[LEVELS+1] ? '0 : oc;

  always_ff @(posedge clk) begin
    if (col) begin
      for (int o = 0; o < CH_OUT; o++) out_sum[o][wi * DW +: DW] <= rword[o];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      oc <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= col && (wi == WCW'(NW - 1));
      if (col) oc <= (wi == WCW'(NW - 1)) ? '0 : wi + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (rst) in_valid |-> in_ready)
    else $error("ternary_conv: window offered while busy");

endmodule
