// argmax_classifier -- the classification stage that follows the fully
// connected layer. The paper's network ends in a softmax; softmax is
// monotonic, so the most probable class is the one with the largest score,
// and this stage outputs that class index together with its score instead
// of the probabilities (this design's simplification).
//
// A linear compare chain picks the largest of the N_CLS signed scores; on a
// tie the lower class index wins. Output is registered: out_valid follows
// in_valid by one clock.
module argmax_classifier
  import dreamnet_pkg::*;
#(
  parameter int unsigned N_CLS = 10,
  localparam int unsigned KW   = (N_CLS > 1) ? $clog2(N_CLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  fc_acc_t       in_score [N_CLS],
  output logic          out_valid,
  output logic [KW-1:0] out_class,
  output fc_acc_t       out_score
);
  logic [KW-1:0] best_k;
  fc_acc_t       best_s;

  always_comb begin
    best_k = '0;
    best_s = in_score[0];
    for (int k = 1; k < N_CLS; k++) begin
      if (in_score[k] > best_s) begin
        best_k = KW'(k);
        best_s = in_score[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_class <= '0;
      out_score <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_class <= best_k;
        out_score <= best_s;
      end
    end
  end
endmodule
