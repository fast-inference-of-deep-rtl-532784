// jet_weights_pkg -- the weights and biases held in logic by the dense layers.
//
// The trained, pruned parameters of the jet-tagging network are not public, so
// this package generates a stand-in set with the same shape and the same
// sparsity.  Each parameter is derived from a 32-bit integer hash of its
// (layer, output neuron, input) index:
//   h    = mix(layer * 2^20 + row * 2^10 + col)
//   kept = (h mod 100) < KEEP_PERCENT
//   w    = kept ? ((h >> 8) mod 1025) - 512 : 0      (raw <16,6>, so |w| <= 0.5)
// Biases use col = 1023.  With KEEP_PERCENT = 32, 1337 of the 4389
// parameters are non-zero, matching the 1338 left by the 70% compression of
// the benchmark network (the pattern of which ones survive is of course not
// the trained one).  To run a real trained network, replace weight() by a
// function that returns its (quantised) parameters; nothing else changes.  All calls happen
// at elaboration time, so the weights end up as constants in the multipliers
// and a zero weight removes its multiplier altogether.
package jet_weights_pkg;

  import nn_pkg::*;

  localparam int unsigned KEEP_PERCENT = 32;
  localparam int unsigned BIAS_COL     = 1023;

  function automatic logic [31:0] mix(input logic [31:0] v);
    logic [31:0] x;
    x = v ^ 32'h9e37_79b9;
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Weight from input col to output neuron row of layer lyr (col = BIAS_COL
  // gives the bias of row).
  function automatic fx_t weight(input int unsigned lyr, input int unsigned row,
                                 input int unsigned col);
    logic [31:0] h;
    int          m;
    h = mix(32'((lyr << 20) | (row << 10) | col));
    if ((h % 32'd100) >= KEEP_PERCENT) return '0;
    m = int'((h >> 8) % 32'd1025) - 512;      // -512 .. 512
    return fx_t'(m);
  endfunction

  function automatic fx_t bias(input int unsigned lyr, input int unsigned row);
    return weight(lyr, row, BIAS_COL);
  endfunction

endpackage
