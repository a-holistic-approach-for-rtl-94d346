// conv_layer -- one convolution layer of the network (C1, C2 or C3): N_OUT
// neurons, each built as in the paper's dataflow graph from N_IN Conv actors
// (one per input feature map), a Sum actor, a bias actor and a relu actor.
//
// All N_IN input maps arrive as one stream: in_valid qualifies in_data[i] for
// every map at once (the maps were produced in lockstep by the previous
// layer). The stream is fanned out to every conv actor (the paper's "Rep"
// actor). Output maps are (IMG_W-2) x (IMG_H-2), all N_OUT of them qualified
// by out_valid.
//
// Latency from the pixel that completes a window to out_valid: 2 (conv)
// + 1 (sum, only when N_IN > 1) + 1 (bias) + 1 (relu) clocks.
// Weights: weights[o][i][k] is tap k of the kernel linking input map i to
// output neuron o; bias[o] is neuron o's bias, both in the B-bit weight
// format. They are inputs so that the network can be reloaded without
// resynthesis, a choice of this design (the paper's generator hard-codes the
// trained values).
module conv_layer
  import dreamnet_pkg::*;
#(
  parameter int unsigned N_IN  = 1,
  parameter int unsigned N_OUT = 4,
  parameter int unsigned IMG_W = 256,
  parameter int unsigned IMG_H = 256,
  parameter int unsigned WGT_W = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  act_t                    in_data [N_IN],
  input  logic signed [WGT_W-1:0] weights [N_OUT][N_IN][KTAPS],
  input  logic signed [WGT_W-1:0] bias    [N_OUT],
  output logic                    out_valid,
  output act_t                    out_data [N_OUT]
);
  logic nrn_valid [N_OUT];

  for (genvar o = 0; o < N_OUT; o++) begin : g_neuron
    logic conv_v   [N_IN];
    acc_t conv_acc [N_IN];
    logic sum_v, bias_v;
    acc_t sum_acc, bias_acc;

    for (genvar i = 0; i < N_IN; i++) begin : g_conv
      conv3x3_actor #(.IMG_W(IMG_W), .IMG_H(IMG_H), .WGT_W(WGT_W)) u_conv (
        .clk, .rst_n,
        .in_valid (in_valid),
        .in_data  (in_data[i]),
        .weights  (weights[o][i]),
        .out_valid(conv_v[i]),
        .out_acc  (conv_acc[i])
      );
    end

    if (N_IN > 1) begin : g_sum
      sum_actor #(.N_IN(N_IN)) u_sum (
        .clk, .rst_n,
        .in_valid (conv_v),
        .in_acc   (conv_acc),
        .out_valid(sum_v),
        .out_acc  (sum_acc)
      );
    end else begin : g_nosum
      assign sum_v   = conv_v[0];
      assign sum_acc = conv_acc[0];
    end

    bias_actor #(.WGT_W(WGT_W)) u_bias (
      .clk, .rst_n,
      .bias     (bias[o]),
      .in_valid (sum_v),
      .in_acc   (sum_acc),
      .out_valid(bias_v),
      .out_acc  (bias_acc)
    );

    relu_actor #(.WGT_W(WGT_W)) u_relu (
      .clk, .rst_n,
      .in_valid (bias_v),
      .in_acc   (bias_acc),
      .out_valid(nrn_valid[o]),
      .out_data (out_data[o])
    );
  end

  assign out_valid = nrn_valid[0];

endmodule
