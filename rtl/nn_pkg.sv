// nn_pkg -- number format and shared helpers of the jet-tagger datapath.
//
// Every value that travels between layers (inputs, weights, biases, neuron
// outputs) is a signed fixed-point number <16,6>: 16 bits in total, 6 of them
// above the binary point (sign included), 10 below.  This is the precision
// quoted for the benchmark network.  Products and sums are kept at full width
// inside a layer and only brought back to <16,6> at the layer output: the low
// bits are truncated (rounding towards minus infinity) and values outside the
// range saturate.  Truncation and saturation are choices of this design; the
// source of the network only fixes the <X,Y> format.
package nn_pkg;

  localparam int unsigned W_TOT  = 16;            // X of <X,Y>
  localparam int unsigned W_INT  = 6;             // Y of <X,Y>
  localparam int unsigned W_FRAC = W_TOT - W_INT; // 10 fractional bits

  typedef logic signed [W_TOT-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'(16'sh7fff);
  localparam fx_t FX_MIN = fx_t'(16'sh8000);

  // Network of the benchmark classifier: 16 inputs, hidden layers of 64, 32
  // and 32 ReLU neurons, 5 softmax outputs (q, g, W, Z, t).
  localparam int unsigned NET_N_IN  = 16;
  localparam int unsigned NET_N_H1  = 64;
  localparam int unsigned NET_N_H2  = 32;
  localparam int unsigned NET_N_H3  = 32;
  localparam int unsigned NET_N_OUT = 5;

  // Bring a wide accumulator holding 2*W_FRAC fractional bits back to <16,6>:
  // arithmetic shift (truncation) then saturation.  Returns the saturated
  // value; sat reports whether the value was clipped.
  function automatic fx_t fx_from_acc(input logic signed [47:0] acc, output logic sat);
    logic signed [47:0] s;
    s = acc >>> W_FRAC;
    if (s > 48'sd32767) begin
      sat = 1'b1;
      return FX_MAX;
    end else if (s < -48'sd32768) begin
      sat = 1'b1;
      return FX_MIN;
    end else begin
      sat = 1'b0;
      return fx_t'(s[W_TOT-1:0]);
    end
  endfunction

endpackage
