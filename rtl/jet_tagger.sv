// jet_tagger -- fully connected jet-substructure classifier, input to softmax.
//
// Sixteen expert jet-substructure features go in; five class probabilities
// (light quark, gluon, W boson, Z boson, top quark) come out.  The network is
// the compressed three-hidden-layer model:
//   16 inputs -> dense 64 + ReLU -> dense 32 + ReLU -> dense 32 + ReLU
//             -> dense 5 -> softmax
// Each layer is computed by its own block, one after the other, and the
// blocks form one pipeline, so a new jet can enter every REUSE cycles while
// earlier jets are still inside.  All values are <16,6> fixed point; the
// weights are constants in logic (jet_weights_pkg), pruned weights cost no
// multiplier.
//
// Timing: from the edge that takes in_x to the edge at which out_y can be
// taken (out_valid high) the latency is 4*(REUSE+2) + 4 cycles: REUSE+2 per
// dense layer and 4 for the softmax.  For REUSE = 1 that is 16 cycles, 80 ns
// at 200 MHz; every extra use of a multiplier adds one cycle per dense layer,
// four in all.  in_ready is high when a jet may be presented (always for
// REUSE = 1); a jet offered while it is low is a protocol error (assertion in
// dense).  sat_count counts outputs of dense layers that were clipped to the
// <16,6> range, a diagnostic for the choice of integer bits.
//
// Layer sizes, activations, number format, reuse factor and the pipelined
// layer-by-layer structure follow the source network; the handshake, the
// position of the pipeline registers and the saturation counter are this
// design's choices.  The pins are the ports themselves: every feature and
// probability bit is a wire, as in a bare board-level test wrapper.
module jet_tagger
  import nn_pkg::*;
#(
  parameter int unsigned REUSE = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  fx_t         in_x  [NET_N_IN],
  output logic        out_valid,
  output fx_t         out_y [NET_N_OUT],
  output logic [31:0] sat_count
);

  // layer 1
  fx_t                h1_acc [NET_N_H1];
  fx_t                h1     [NET_N_H1];
  logic               h1_valid;
  logic [NET_N_H1-1:0] h1_sat;
  // layer 2
  fx_t                h2_acc [NET_N_H2];
  fx_t                h2     [NET_N_H2];
  logic               h2_valid, l2_ready;
  logic [NET_N_H2-1:0] h2_sat;
  // layer 3
  fx_t                h3_acc [NET_N_H3];
  fx_t                h3     [NET_N_H3];
  logic               h3_valid, l3_ready;
  logic [NET_N_H3-1:0] h3_sat;
  // output layer
  fx_t                 z     [NET_N_OUT];
  logic                z_valid, l4_ready;
  logic [NET_N_OUT-1:0] z_sat;

  dense #(.N_IN(NET_N_IN), .N_OUT(NET_N_H1), .REUSE(REUSE), .LAYER_ID(1)) u_l1 (
    .clk, .rst_n, .in_valid, .in_ready, .in_x,
    .out_valid(h1_valid), .out_y(h1_acc), .out_sat(h1_sat));
  relu #(.N(NET_N_H1)) u_r1 (.x(h1_acc), .y(h1), .neg());

  dense #(.N_IN(NET_N_H1), .N_OUT(NET_N_H2), .REUSE(REUSE), .LAYER_ID(2)) u_l2 (
    .clk, .rst_n, .in_valid(h1_valid), .in_ready(l2_ready), .in_x(h1),
    .out_valid(h2_valid), .out_y(h2_acc), .out_sat(h2_sat));
  relu #(.N(NET_N_H2)) u_r2 (.x(h2_acc), .y(h2), .neg());

  dense #(.N_IN(NET_N_H2), .N_OUT(NET_N_H3), .REUSE(REUSE), .LAYER_ID(3)) u_l3 (
    .clk, .rst_n, .in_valid(h2_valid), .in_ready(l3_ready), .in_x(h2),
    .out_valid(h3_valid), .out_y(h3_acc), .out_sat(h3_sat));
  relu #(.N(NET_N_H3)) u_r3 (.x(h3_acc), .y(h3), .neg());

  dense #(.N_IN(NET_N_H3), .N_OUT(NET_N_OUT), .REUSE(REUSE), .LAYER_ID(4)) u_l4 (
    .clk, .rst_n, .in_valid(h3_valid), .in_ready(l4_ready), .in_x(h3),
    .out_valid(z_valid), .out_y(z), .out_sat(z_sat));

  softmax #(.N(NET_N_OUT)) u_sm (
    .clk, .rst_n, .in_valid(z_valid), .in_x(z), .out_valid, .out_y);

  // Saturation counter over all dense-layer outputs, counted when they are
  // taken by the next block.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sat_count <= '0;
    else sat_count <= sat_count
                    + (h1_valid ? 32'($countones(h1_sat)) : 32'd0)
                    + (h2_valid ? 32'($countones(h2_sat)) : 32'd0)
                    + (h3_valid ? 32'($countones(h3_sat)) : 32'd0)
                    + (z_valid  ? 32'($countones(z_sat))  : 32'd0);
  end

  // All layers share one reuse factor, so a layer is always free again when
  // the one before it delivers (both run at one vector per REUSE cycles).
  a_l2_free : assert property (@(posedge clk) disable iff (!rst_n) h1_valid |-> l2_ready);
  a_l3_free : assert property (@(posedge clk) disable iff (!rst_n) h2_valid |-> l3_ready);
  a_l4_free : assert property (@(posedge clk) disable iff (!rst_n) h3_valid |-> l4_ready);

endmodule
