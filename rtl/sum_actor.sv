// sum_actor -- the "Sum" actor of a convolution layer: adds the results of
// the N_IN conv actors that feed one output neuron (one per input map).
//
// All conv actors of a layer see the same pixel stream and have the same
// latency, so their tokens arrive in the same clock; an assertion checks
// that the valids agree. Output is registered: one clock of latency, one
// token per clock. The actor follows the paper's dataflow graph; the
// same-cycle alignment (no FIFOs in front of the adder) is this design's
// choice.
module sum_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned N_IN = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid [N_IN],
  input  acc_t in_acc   [N_IN],
  output logic out_valid,
  output acc_t out_acc
);
  acc_t total;
  always_comb begin
    total = '0;
    for (int i = 0; i < N_IN; i++) total += in_acc[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= in_valid[0];
      if (in_valid[0]) out_acc <= total;
    end
  end

  // every input channel must deliver its token in the same cycle
  for (genvar i = 1; i < N_IN; i++) begin : g_align
    a_aligned: assert property (@(posedge clk) disable iff (!rst_n) in_valid[i] == in_valid[0])
      else $error("sum_actor: input %0d out of step with input 0", i);
  end

endmodule
