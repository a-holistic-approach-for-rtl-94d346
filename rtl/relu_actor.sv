// relu_actor -- the "relu" actor: rectified linear activation of a neuron's
// biased sum, and conversion back to an activation for the next layer.
//
// The accumulator carries ACT_W+WGT_W-1 fraction bits; the actor drops the
// WGT_W-1 weight fraction bits (arithmetic shift, i.e. truncation), then maps
// negative values to 0 (the ReLU) and clamps values above the activation
// range to its maximum (saturation, so the narrow B-bit datapath cannot wrap
// around). One clock of latency, one token per clock. ReLU follows the paper;
// folding the requantisation into this actor, truncation and saturation are
// this design's choices.
module relu_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned WGT_W = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t in_acc,
  output logic out_valid,
  output act_t out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= relu_requant(in_acc, WGT_W - 1);
    end
  end
endmodule
