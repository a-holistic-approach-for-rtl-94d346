// bias_actor -- the "bias" actor: adds a neuron's learned bias to its
// accumulated convolution result.
//
// The bias has the weight format (WGT_W bits, WGT_W-1 fraction bits, in
// activation units), so it is aligned with the accumulator by a left shift of
// ACT_W bits before the add. One clock of latency, one token per clock. The
// actor is named in the paper's dataflow graph; the number format is this
// design's choice.
module bias_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned WGT_W = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [WGT_W-1:0] bias,
  input  logic                    in_valid,
  input  acc_t                    in_acc,
  output logic                    out_valid,
  output acc_t                    out_acc
);
  acc_t bias_al;
  assign bias_al = acc_t'(bias) <<< ACT_W;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_acc <= in_acc + bias_al;
    end
  end

endmodule
