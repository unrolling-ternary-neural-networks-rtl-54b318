// tnn_pkg: types, number formats and network constants shared by the
// ternary CNN datapath.
//
// Number formats. Activations and all partial sums are 16-bit two's
// complement with 4 fractional bits (Q12.4). The combined batch-norm /
// ternary scaling factor c is 16-bit with 6 fractional bits (Q10.6); the
// shift b is held in the activation format. These widths are the ones the
// network was quantised to.
//
// Weights. The hardware has the trained ternary weights built into its
// wiring, so the RTL needs them at elaboration time. The trained values are
// not available here, so this package defines a deterministic stand-in:
// tern_weight(layer, in, out) returns -1, 0 or +1 from an integer hash, with
// the per-layer fraction of zeros set to the sparsity of the trained network
// (54.7 % for conv1, about 76 % for the other convolutions and the first
// dense layer, 58.4 % for the last layer). Substituting real weights means
// replacing this one function (for example by a table lookup). The same
// holds for scale_c / shift_b, the per-channel scale-and-shift constants.
//
// Layer numbering used by every function here: 1..6 are conv1..conv6, 7 is
// the 4096->128 dense layer, 8 is the 128->10 output layer.
package tnn_pkg;

  localparam int ACT_W   = 16;  // activation and sum width
  localparam int ACT_FRAC = 4;  // fractional bits of an activation
  localparam int COEF_W  = 16;  // scale constant width
  localparam int COEF_FRAC = 6; // fractional bits of the scale constant

  typedef logic signed [ACT_W-1:0]  act_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  // Ternary weight encoding as stored in the dense-layer ROMs.
  typedef enum logic [1:0] {
    W_ZERO = 2'b00,
    W_POS  = 2'b01,
    W_NEG  = 2'b11
  } tern_e;

  // Zeros per 1000 weights, per layer (sparsity column of the network table).
  function automatic int sparsity_permil(int layer);
    case (layer)
      1: return 547;
      2: return 769;
      3: return 761;
      4: return 753;
      5: return 758;
      6: return 754;
      7: return 762;
      default: return 584;
    endcase
  endfunction

  // 32-bit integer mixing hash (xorshift-multiply), used only to make the
  // stand-in constants.
  function automatic int unsigned mix3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Ternary weight of input `in` of output `out` in layer `layer`.
  // For convolutions, `in` = window_position * channels_in + channel, with
  // window positions numbered a..i = 0..8 as in the window_buffer.
  function automatic int tern_weight(int layer, int in, int out);
    int unsigned h;
    h = mix3(layer, in, out);
    if ((h % 1000) < sparsity_permil(layer)) return 0;
    return h[31] ? -1 : 1;
  endfunction

  function automatic tern_e tern_code(int w);
    return (w > 0) ? W_POS : (w < 0) ? W_NEG : W_ZERO;
  endfunction

  // Scale constant c (Q10.6) of channel `ch` after layer `layer`:
  // a stand-in in the range 0.125 .. 0.61.
  function automatic coef_t scale_c(int layer, int ch);
    return coef_t'(8 + (mix3(layer + 100, ch, 7) % 32));
  endfunction

  // Shift constant b (Q12.4) of channel `ch` after layer `layer`:
  // a stand-in in the range -2.0 .. +1.94.
  function automatic act_t shift_b(int layer, int ch);
    return act_t'(int'(mix3(layer + 200, ch, 11) % 64) - 32);
  endfunction

  // ceil(log_r(n)) for n >= 1, r >= 2: number of adder levels to reduce n
  // operands to one.
  function automatic int clog_r(int n, int r);
    int lv = 0;
    int m = n;
    while (m > 1) begin
      m = (m + r - 1) / r;
      lv++;
    end
    return lv;
  endfunction

endpackage
