// dense_layer: fully connected layer with ternary weights streamed from an
// on-chip ROM, P inputs per cycle, one accumulator per output.
//
// A whole input vector of N_IN values arrives as N_IN/P groups of P values
// (one group per in_valid, in index order; the block counts groups to find
// the start of each vector). For each group the weight row is read from
// dense_weight_rom, every output forms the P products x_k * w_k (with a
// ternary weight a product is x, -x or 0), adds them in a registered tree
// and adds the tree result to its running sum. After the last group of a
// vector, out_valid pulses with all N_OUT sums, and the next group starts
// new sums.
//
// Pipeline (Fig. "multiply and accumulate"): ROM read | products | log2(P)
// adder levels | accumulator. out_valid follows the in_valid of the last
// group by 3 + log2(P) cycles. Sums are 16 bits and wrap.
//
// From the paper: weights streamed from on-chip read-only memory and
// multiplied into the activations, registered products, a registered adder
// tree and an accumulator per output, 4 inputs per cycle, 2-bit weights.
// Own choices: the group counter as the vector delimiter and the 16-bit
// accumulator (the network's activation width).
module dense_layer
  import tnn_pkg::*;
#(
  parameter int LAYER = 7,
  parameter int N_IN  = 4096,
  parameter int N_OUT = 128,
  parameter int P     = 4
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  act_t [P-1:0]      in_x,
  output logic              out_valid,
  output act_t [N_OUT-1:0]  out_sum
);

  localparam int G  = N_IN / P;                  // groups per vector
  localparam int GW = $clog2(G);
  localparam int TL = $clog2(P);                 // adder tree levels
  localparam int DLY = TL + 1;                   // products + tree

  logic [GW-1:0] gcnt;
  logic [P*N_OUT*2-1:0] wrow;
  act_t [P-1:0] x_d;
  logic v_d, first_d, last_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      gcnt <= '0;
      v_d <= 1'b0;
    end else begin
      v_d <= in_valid;
      if (in_valid) gcnt <= (gcnt == GW'(G - 1)) ? '0 : gcnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    x_d     <= in_x;
    first_d <= (gcnt == '0);
    last_d  <= (gcnt == GW'(G - 1));
  end

  dense_weight_rom #(.LAYER(LAYER), .N_IN(N_IN), .N_OUT(N_OUT), .P(P)) u_rom (
    .clk(clk), .addr(gcnt), .data(wrow));

  // Flags travel alongside the products and the tree.
  logic [DLY:0] v_p, first_p, last_p;
  assign v_p[0] = v_d;
  assign first_p[0] = first_d;
  assign last_p[0] = last_d;
  always_ff @(posedge clk) begin
    if (rst) v_p[DLY:1] <= '0;
    else     v_p[DLY:1] <= v_p[DLY-1:0];
    first_p[DLY:1] <= first_p[DLY-1:0];
    last_p[DLY:1]  <= last_p[DLY-1:0];
  end

  act_t [N_OUT-1:0] tsum;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    logic [P-1:0][ACT_W-1:0] prod;
    always_ff @(posedge clk) begin
      for (int k = 0; k < P; k++) begin
        case (tern_e'(wrow[(k * N_OUT + o) * 2 +: 2]))
          W_POS:   prod[k] <= x_d[k];
          W_NEG:   prod[k] <= -x_d[k];
          default: prod[k] <= '0;
        endcase
      end
    end
    logic unused_st;
    add_tree #(.N(P), .RADIX(2), .DW(ACT_W), .LEVELS(TL)) u_tree (
      .clk(clk), .start(1'b1), .in(prod), .out(tsum[o]), .start_out(unused_st));
  end

  // Accumulators.
  act_t [N_OUT-1:0] acc;
  always_ff @(posedge clk) begin
    if (v_p[DLY]) begin
      for (int o = 0; o < N_OUT; o++) begin
        acc[o] <= first_p[DLY] ? tsum[o] : acc[o] + tsum[o];
        if (last_p[DLY]) out_sum[o] <= first_p[DLY] ? tsum[o] : acc[o] + tsum[o];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v_p[DLY] && last_p[DLY];
  end

endmodule
