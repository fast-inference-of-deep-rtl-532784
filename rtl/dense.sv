// dense -- one fully connected layer, y = W*x + b, with a multiplier reuse factor.
//
// The layer computes N_OUT neuron values from N_IN inputs in <16,6> fixed
// point.  The weights are constants taken from jet_weights_pkg for layer
// LAYER_ID, so they live in logic rather than in memory, and a zero (pruned)
// weight leaves a constant-zero product that synthesis removes.
//
// Parallelism is set by REUSE (R).  The N_IN*N_OUT products are numbered
// neuron by neuron, p = j*N_IN + i, and multiplier m does products m*R .. m*R+R-1,
// one per clock cycle, so the layer owns ceil(N_IN*N_OUT/R) multipliers and
// uses each of them R times.  R = 1 is fully parallel; a 2x2 layer at R = 4
// runs on one multiplier.  A new input vector is taken every R cycles
// (initiation interval R).  Each product is added to the accumulator of its
// own neuron; the multipliers that can feed a neuron form a short window of
// about N_IN/R + 1, so the adder per neuron stays small.
//
// Pipeline, counted in rising clock edges after the edge that accepts in_x:
//   edge 0      in_x is stored in x_q, phase counter starts at 0
//   edge 1..R   products of phase 0..R-1 are registered (multiplier stage)
//   edge 2..R+1 the registered products are summed into the accumulators;
//               after edge R+1 the accumulators hold W*x + b, out_valid is 1
// The next block takes the result at edge R+2, so a layer costs R+2 cycles:
// one per use of a multiplier, as in L = L_mult + (R-1)*II_mult + L_activ
// with II_mult = 1, plus the input and accumulator registers.  The
// activation is applied by the following block and adds no cycle.
//
// Interface: in_valid/in_ready handshake on the input (in_ready is low while a
// vector is still being worked on, always high for R = 1); out_valid is a
// one-cycle strobe with out_y valid in that cycle and held until the next
// result.  There is no back-pressure on the output: a trigger pipeline never
// stalls.  out_sat flags, per neuron, that the result was clipped to the
// <16,6> range.  The order in which products share multipliers, the
// registering points, truncation with saturation and the handshake are this
// design's choices; the reuse factor, its effect on the multiplier count,
// interval and latency follow the source.
module dense
  import nn_pkg::*;
#(
  parameter int unsigned N_IN     = 16,
  parameter int unsigned N_OUT    = 64,
  parameter int unsigned REUSE    = 1,
  parameter int unsigned LAYER_ID = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fx_t  in_x  [N_IN],
  output logic out_valid,
  output fx_t  out_y [N_OUT],
  output logic [N_OUT-1:0] out_sat
);

  localparam int unsigned NPROD = N_IN * N_OUT;                  // products per vector
  localparam int unsigned NMULT = (NPROD + REUSE - 1) / REUSE;   // multipliers
  localparam int unsigned PH_W  = (REUSE > 1) ? $clog2(REUSE) : 1;
  localparam int unsigned ACC_W = 2 * W_TOT + $clog2(N_IN + 1) + 1;

  // Product p = j*N_IN + i (neuron j, input i) is done by multiplier p / REUSE
  // in phase p % REUSE.  Weights as one flat constant indexed by p, zero for
  // the padding products p >= NPROD.
  function automatic logic [NMULT*REUSE*W_TOT-1:0] weight_table();
    logic [NMULT*REUSE*W_TOT-1:0] t;
    for (int unsigned p = 0; p < NMULT*REUSE; p++)
      t[p*W_TOT +: W_TOT] = (p < NPROD) ? jet_weights_pkg::weight(LAYER_ID, p / N_IN, p % N_IN) : '0;
    return t;
  endfunction

  function automatic logic [N_OUT*W_TOT-1:0] bias_table();
    logic [N_OUT*W_TOT-1:0] t;
    for (int unsigned j = 0; j < N_OUT; j++)
      t[j*W_TOT +: W_TOT] = jet_weights_pkg::bias(LAYER_ID, j);
    return t;
  endfunction

  localparam logic [NMULT*REUSE*W_TOT-1:0] WTAB = weight_table();
  localparam logic [N_OUT*W_TOT-1:0]       BTAB = bias_table();

  typedef logic signed [2*W_TOT-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]   acc_t;

  // ---- input register and phase counter ------------------------------------
  fx_t              x_q [N_IN];
  logic             active;
  logic [PH_W-1:0]  ph;
  logic             last_ph;

  assign last_ph  = (ph == PH_W'(REUSE - 1));
  assign in_ready = !active || last_ph;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      ph     <= '0;
      for (int unsigned i = 0; i < N_IN; i++) x_q[i] <= '0;
    end else if (in_valid && in_ready) begin
      active <= 1'b1;
      ph     <= '0;
      x_q    <= in_x;
    end else if (active) begin
      if (last_ph) active <= 1'b0;
      else         ph     <= ph + 1'b1;
    end
  end

  // ---- multiplier stage: NMULT multipliers, each used once per phase -------
  prod_t           prod_c [NMULT];
  prod_t           prod_q [NMULT];
  logic            v1, first1, last1;
  logic [PH_W-1:0] ph1;

  always_comb begin
    for (int unsigned m = 0; m < NMULT; m++) begin
      fx_t w;
      fx_t x;
      w = '0;
      x = '0;
      for (int unsigned c = 0; c < REUSE; c++)
        if (ph == PH_W'(c)) begin
          w = fx_t'(WTAB[(m*REUSE + c)*W_TOT +: W_TOT]);
          x = x_q[((m*REUSE + c) % N_IN)];
        end
      prod_c[m] = prod_t'(w) * prod_t'(x);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      ph1    <= '0;
      for (int unsigned m = 0; m < NMULT; m++) prod_q[m] <= '0;
    end else begin
      v1     <= active;
      first1 <= (ph == '0);
      last1  <= last_ph;
      ph1    <= ph;
      if (active) prod_q <= prod_c;
    end
  end

  // ---- accumulator stage ----------------------------------------------------
  // Neuron j owns products j*N_IN .. j*N_IN+N_IN-1, which sit on multipliers
  // (j*N_IN)/REUSE .. ((j+1)*N_IN-1)/REUSE; in each phase the ones whose
  // product belongs to j are added.
  acc_t acc [N_OUT];
  logic vout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vout <= 1'b0;
      for (int unsigned j = 0; j < N_OUT; j++) acc[j] <= '0;
    end else begin
      vout <= v1 && last1;
      if (v1) begin
        for (int unsigned j = 0; j < N_OUT; j++) begin
          acc_t s;
          // bias carries W_FRAC fractional bits; the products carry 2*W_FRAC
          s = first1 ? (acc_t'(fx_t'(BTAB[j*W_TOT +: W_TOT])) <<< W_FRAC) : acc[j];
          for (int unsigned m = (j*N_IN)/REUSE; m <= ((j+1)*N_IN - 1)/REUSE; m++)
            for (int unsigned c = 0; c < REUSE; c++)
              if (ph1 == PH_W'(c) && (m*REUSE + c) / N_IN == j)
                s = s + acc_t'(prod_q[m]);
          acc[j] <= s;
        end
      end
    end
  end

  // ---- output: truncate and saturate to <16,6> ------------------------------
  always_comb begin
    for (int unsigned j = 0; j < N_OUT; j++) begin
      logic sat;
      out_y[j]   = fx_from_acc(48'(acc[j]), sat);
      out_sat[j] = sat;
    end
  end

  assign out_valid = vout;

  // A producer must respect in_ready: the trigger pipeline has no buffer.
  a_no_drop : assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_ready)
    else $error("dense %0d: input offered while busy", LAYER_ID);

endmodule
