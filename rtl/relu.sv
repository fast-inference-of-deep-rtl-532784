// relu -- rectified linear activation of a vector of neuron values.
//
// y[i] = max(x[i], 0) in <16,6> fixed point.  The function is a sign test and
// a zeroing multiplexer per value, built in plain logic with no table, as the
// source does for ReLU (tables are kept for the smooth activations).  It is
// purely combinational: it sits between the accumulator register of one dense
// layer and the input register of the next and adds no clock cycle.  neg
// flags, per value, that it was clipped to zero.
module relu
  import nn_pkg::*;
#(
  parameter int unsigned N = 64
) (
  input  fx_t         x   [N],
  output fx_t         y   [N],
  output logic [N-1:0] neg
);

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      neg[i] = x[i][W_TOT-1];
      y[i]   = neg[i] ? '0 : x[i];
    end
  end

endmodule
