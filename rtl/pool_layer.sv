// pool_layer -- one sub-sampling layer of the network (S1 or S2): for each of
// the N feature maps a Pool H actor followed by a Pool V actor, giving 2x2
// max pooling with stride 2, as in the paper's dataflow graph.
//
// The N maps travel in lockstep under one valid. An IMG_W x IMG_H map becomes
// (IMG_W/2) x (IMG_H/2) (odd sizes rounded down). Latency: 1 clock (Pool H)
// + 1 clock (Pool V) after the bottom-right pixel of a 2x2 block.
module pool_layer
  import dreamnet_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned IMG_W = 254,
  parameter int unsigned IMG_H = 254
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t in_data  [N],
  output logic out_valid,
  output act_t out_data [N]
);
  logic map_valid [N];

  for (genvar m = 0; m < N; m++) begin : g_map
    logic h_valid;
    act_t h_data;

    pool_h_actor #(.IMG_W(IMG_W)) u_pool_h (
      .clk, .rst_n,
      .in_valid (in_valid),
      .in_data  (in_data[m]),
      .out_valid(h_valid),
      .out_data (h_data)
    );

    pool_v_actor #(.IMG_W(IMG_W / 2), .IMG_H(IMG_H)) u_pool_v (
      .clk, .rst_n,
      .in_valid (h_valid),
      .in_data  (h_data),
      .out_valid(map_valid[m]),
      .out_data (out_data[m])
    );
  end

  assign out_valid = map_valid[0];

endmodule
