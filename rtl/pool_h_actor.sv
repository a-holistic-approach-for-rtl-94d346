// pool_h_actor -- the "Pool H" actor: horizontal half of a 2x2 max pooling.
//
// Keeps the even-column pixel of each column pair and, when the odd-column
// pixel arrives, emits the larger of the two. An IMG_W x IMG_H map becomes
// (IMG_W/2) x IMG_H; with an odd width the last column is dropped. One clock
// of latency after the odd-column pixel; at most one token every two input
// tokens. Splitting 2x2 max pooling into a horizontal and a vertical actor
// follows the paper's dataflow graph; dropping an odd last column is this
// design's choice.
module pool_h_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned IMG_W = 254
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t in_data,
  output logic out_valid,
  output act_t out_data
);
  localparam int unsigned CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned LAST_PAIR_COL = 2 * (IMG_W / 2) - 1;

  logic [CW-1:0] col;
  act_t          held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col       <= '0;
      held      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        col <= (col == CW'(IMG_W - 1)) ? '0 : col + 1'b1;
        if (!col[0]) begin
          held <= in_data;
        end else if (col <= CW'(LAST_PAIR_COL)) begin
          out_valid <= 1'b1;
          out_data  <= (in_data > held) ? in_data : held;
        end
      end
    end
  end
endmodule
