// conv3x3_actor -- one "Conv" actor of the dataflow network: a 3x3
// convolution of one streamed feature map with one kernel.
//
// Pixels arrive in raster order, at most one per clock, qualified by
// in_valid; there is no backpressure. Two line buffers of IMG_W words hold
// the two previous rows, and a 3x3 register window shifts left on every
// accepted pixel. Once the window covers rows r-2..r and columns c-2..c
// (r,c >= 2) a result is produced, so the output map is the "valid" region of
// (IMG_W-2) x (IMG_H-2) pixels (no padding). The result is the plain sum of
// the nine activation*weight products in accumulator format (no bias, no
// activation: those are separate actors).
//
// Kernel layout: weights[3*i+j] multiplies window row i (0 = oldest row),
// column j (0 = leftmost): weights[0] is the top-left tap, weights[8] the
// bottom-right (correlation order, as deep-learning frameworks store kernels).
//
// Timing: out_valid/out_acc follow the in_valid pixel that completes a window
// by 2 clocks (window register, then product-sum register). Frames may be
// streamed back to back; the position counters wrap at the frame size.
//
// The actor structure (each Conv actor owns its buffers) follows the paper's
// dataflow graph; the absence of padding, the window form and the latency are
// this design's choices.
module conv3x3_actor
  import dreamnet_pkg::*;
#(
  parameter int unsigned IMG_W = 256,
  parameter int unsigned IMG_H = 256,
  parameter int unsigned WGT_W = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  act_t                    in_data,
  input  logic signed [WGT_W-1:0] weights [KTAPS],
  output logic                    out_valid,
  output acc_t                    out_acc
);
  localparam int unsigned CW = (IMG_W > 1) ? $clog2(IMG_W) : 1;
  localparam int unsigned RW = (IMG_H > 1) ? $clog2(IMG_H) : 1;

  logic [CW-1:0] col;
  logic [RW-1:0] row;
  act_t          lb0 [IMG_W];   // row r-1
  act_t          lb1 [IMG_W];   // row r-2
  act_t          win [3][3];    // win[0] top row, win[2] current row; [2] newest column
  logic          win_valid;

  // raster position of the incoming pixel
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

  // line buffers (read-before-write memories)
  always_ff @(posedge clk) begin
    if (in_valid) begin
      lb1[col] <= lb0[col];
      lb0[col] <= in_data;
    end
  end

  // 3x3 window
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < 3; r++) begin
        win[r][0] <= win[r][1];
        win[r][1] <= win[r][2];
      end
      win[0][2] <= lb1[col];
      win[1][2] <= lb0[col];
      win[2][2] <= in_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) win_valid <= 1'b0;
    else        win_valid <= in_valid && (row >= RW'(2)) && (col >= CW'(2));
  end

  // product-sum stage
  acc_t psum;
  always_comb begin
    psum = '0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        psum += mac_term(win[r][c], 16'(weights[3*r+c]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= win_valid;
      if (win_valid) out_acc <= psum;
    end
  end

endmodule
