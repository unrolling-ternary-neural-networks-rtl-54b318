// dense_weight_rom: on-chip read-only weight memory of a dense layer.
//
// A dense layer with N_IN inputs and N_OUT outputs that consumes P inputs
// per cycle needs, each cycle, the weights of those P inputs for all N_OUT
// outputs. Row r of this memory therefore holds the 2-bit ternary codes
// (tnn_pkg::tern_e) of inputs r*P .. r*P+P-1 for every output: the code of
// input r*P+k, output o sits at bits [(k*N_OUT + o)*2 +: 2]. There are
// N_IN/P rows. For the 4096 x 128 layer at P = 4 this is 1024 rows of 1024
// bits (1 Mbit), which an FPGA maps onto 16 block RAMs of 64-bit ports.
//
// Contents are computed at elaboration from tnn_pkg::tern_weight(LAYER,..).
//
// Timing: synchronous read, data is valid the cycle after addr (block RAM
// behaviour).
//
// From the paper: ternary weights kept in on-chip read-only memory, 2 bits
// per weight, read at 4 inputs x 128 outputs per cycle. Own choices: the
// row layout and the 2-bit code.
module dense_weight_rom
  import tnn_pkg::*;
#(
  parameter int LAYER = 7,
  parameter int N_IN  = 4096,
  parameter int N_OUT = 128,
  parameter int P     = 4
) (
  input  logic                      clk,
  input  logic [$clog2(N_IN/P)-1:0] addr,
  output logic [P*N_OUT*2-1:0]      data
);

  localparam int ROWS = N_IN / P;

  logic [P*N_OUT*2-1:0] rom [ROWS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < P; k++)
        for (int o = 0; o < N_OUT; o++)
          rom[r][(k * N_OUT + o) * 2 +: 2] = tern_code(tern_weight(LAYER, r * P + k, o));
  end

  always_ff @(posedge clk) data <= rom[addr];

endmodule
