// scale_shift: inference-time batch normalisation folded with the ternary
// scaling factor, followed by ReLU.
//
// For every channel ch: y = max(0, ((c_ch * x) >>> 6) + b_ch), where x is a
// Q12.4 activation, c_ch a Q10.6 constant and b_ch a Q12.4 constant. The
// product (32 bits, 10 fractional bits) is shifted right arithmetically by
// 6 to return to 4 fractional bits and truncated to 16 bits. The constants
// come from tnn_pkg::scale_c / shift_b for layer LAYER; being constants,
// the multipliers reduce to shift-and-add logic or DSP blocks at the
// synthesis tool's choice. RELU = 0 leaves out the activation.
//
// Timing: one register stage; out_valid follows in_valid by one cycle. All
// channels are processed in parallel, a new vector may arrive every cycle.
//
// From the paper: y = c (.) x + b with c = s*a combined offline, c with 6
// fractional bits, a multiply and an add per output channel, then the
// activation. Own choices: rounding by truncation (arithmetic shift) and
// 16-bit wrap-around instead of saturation.
module scale_shift
  import tnn_pkg::*;
#(
  parameter int LAYER = 1,
  parameter int CH    = 64,
  parameter bit RELU  = 1'b1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  act_t [CH-1:0] in_x,
  output logic          out_valid,
  output act_t [CH-1:0] out_y
);

  act_t [CH-1:0] y_nxt;

  always_comb begin
    for (int ch = 0; ch < CH; ch++) begin
      logic signed [ACT_W+COEF_W-1:0] prod;
      act_t y;
      prod = in_x[ch] * scale_c(LAYER, ch);
      y = act_t'(prod >>> COEF_FRAC) + shift_b(LAYER, ch);
      y_nxt[ch] = (RELU && y < 0) ? '0 : y;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) out_y <= y_nxt;
  end

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end

endmodule
