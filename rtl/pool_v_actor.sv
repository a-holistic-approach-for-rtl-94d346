// pool_v_actor -- the "Pool V" actor: vertical half of a 2x2 max pooling.
//
// Works on the output of pool_h_actor (IMG_W is already the halved width).
// Each pixel of an even row is written to a one-row buffer; when the pixel
// below it (odd row) arrives, the larger of the two is emitted. An
// IMG_W x IMG_H map becomes IMG_W x (IMG_H/2); with an odd height the last
// row is dropped. One clock of latency after the odd-row pixel. The buffered
// vertical actor follows the paper's dataflow graph; dropping an odd last row
// is this design's choice.
module pool_v_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned IMG_W = 127,
  parameter int unsigned IMG_H = 254
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  act_t in_data,
  output logic out_valid,
  output act_t out_data
);
  localparam int unsigned CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned RW = (IMG_H > 1) ? $clog2(IMG_H) : 1;
  localparam int unsigned LAST_PAIR_ROW = 2 * (IMG_H / 2) - 1;

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  act_t          lb [IMG_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0;
      row <= '0;
    end else if (in_valid) begin
      if (col == CW'(IMG_W - 1)) begin
        col <= '0;
        row <= (row == RW'(IMG_H - 1)) ? '0 : row + 1'b1;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && !row[0]) lb[col] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid && row[0] && (row <= RW'(LAST_PAIR_ROW));
      if (in_valid && row[0]) out_data <= (in_data > lb[col]) ? in_data : lb[col];
    end
  end
endmodule
