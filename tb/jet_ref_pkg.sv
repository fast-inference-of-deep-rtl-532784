// jet_ref_pkg -- bit-exact software model of the jet tagger for the testbenches.
//
// Runs the 16-64-32-32-5 network in 64-bit integers: each dense layer forms
// b*2^10 + sum w*x, shifts right by 10 (truncation), saturates to <16,6> and,
// for the hidden layers, applies ReLU.  It returns the five output-layer
// scores (the softmax input) exactly as the hardware must produce them, and
// the softmax of those scores in double precision.  Vectors are packed, 16
// bits per value, value i at bits [16*i +: 16].
package jet_ref_pkg;
  import nn_pkg::*;

  typedef logic [NET_N_IN*16-1:0]  in_vec_t;
  typedef logic [NET_N_OUT*16-1:0] out_vec_t;
  typedef logic [64*16-1:0]        wide_t;     // large enough for any layer

  // one layer on packed vectors; nsat counts clipped outputs
  function automatic wide_t layer(input int lyr, input int nin, input int nout,
                                  input wide_t x, input bit do_relu, inout int nsat);
    wide_t y;
    y = '0;
    for (int j = 0; j < nout; j++) begin
      longint acc;
      acc = longint'(jet_weights_pkg::bias(lyr, j)) * 1024;
      for (int i = 0; i < nin; i++)
        acc += longint'(jet_weights_pkg::weight(lyr, j, i)) * longint'(fx_t'(x[i*16 +: 16]));
      acc = acc >>> 10;
      if (acc > 32767)       begin acc = 32767;  nsat++; end
      else if (acc < -32768) begin acc = -32768; nsat++; end
      if (do_relu && acc < 0) acc = 0;
      y[j*16 +: 16] = 16'(acc);
    end
    return y;
  endfunction

  function automatic out_vec_t scores(input in_vec_t x, inout int nsat);
    wide_t v;
    v = wide_t'(x);
    v = layer(1, NET_N_IN, NET_N_H1, v, 1'b1, nsat);
    v = layer(2, NET_N_H1, NET_N_H2, v, 1'b1, nsat);
    v = layer(3, NET_N_H2, NET_N_H3, v, 1'b1, nsat);
    v = layer(4, NET_N_H3, NET_N_OUT, v, 1'b0, nsat);
    return out_vec_t'(v);
  endfunction

  function automatic real prob(input out_vec_t z, input int k);
    real s;
    s = 0.0;
    for (int i = 0; i < NET_N_OUT; i++) s += $exp(real'(fx_t'(z[i*16 +: 16])) / 1024.0);
    return $exp(real'(fx_t'(z[k*16 +: 16])) / 1024.0) / s;
  endfunction
endpackage
