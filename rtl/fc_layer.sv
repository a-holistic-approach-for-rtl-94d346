// fc_layer -- the fully connected ("inner product") layer: N_CLS dot
// products between every value of the N_IN last-layer feature maps of a frame
// and a weight per (position, map, class), plus a bias per class.
//
// The C3 maps arrive in raster order under one valid, all N_IN maps in the
// same clock. A position counter (0 .. MAP_W*MAP_H-1) addresses a weight RAM
// whose word holds the N_IN x N_CLS weights of that position; every valid
// token updates all N_CLS accumulators with N_IN products each. When the last
// position of the frame arrives the class scores (accumulator + bias) are
// emitted and the accumulators restart from zero for the next frame.
//
// Weight RAM: written one weight at a time through the wr_* port (any time,
// but not while the weight being written is in use). The RAM read is
// registered: a token is accepted in clock t, its weights are read in t and
// accumulated in t+1, and out_valid rises in clock t+2 after the last token.
// Scores are signed FC_ACC_W-bit values with ACT_W+WGT_W-1 fraction bits.
// The layer's function (10 inner products) is the paper's; the RAM, its
// load port and the parallel schedule are this design's choices.
module fc_layer
  import dreamnet_pkg::*;
#(
  parameter int unsigned N_IN   = 8,
  parameter int unsigned MAP_W  = 60,
  parameter int unsigned MAP_H  = 60,
  parameter int unsigned N_CLS  = 10,
  parameter int unsigned WGT_W  = 5,
  localparam int unsigned NPOS  = MAP_W * MAP_H,
  localparam int unsigned PW    = (NPOS > 1) ? $clog2(NPOS) : 1,
  localparam int unsigned MW    = (N_IN > 1) ? $clog2(N_IN) : 1,
  localparam int unsigned KW    = (N_CLS > 1) ? $clog2(N_CLS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight load port
  input  logic                    wr_en,
  input  logic [PW-1:0]           wr_pos,
  input  logic [MW-1:0]           wr_map,
  input  logic [KW-1:0]           wr_cls,
  input  logic signed [WGT_W-1:0] wr_data,
  input  logic signed [WGT_W-1:0] bias [N_CLS],
  // feature stream
  input  logic                    in_valid,
  input  act_t                    in_data [N_IN],
  // class scores, one set per frame
  output logic                    out_valid,
  output fc_acc_t                 out_score [N_CLS]
);
  logic signed [WGT_W-1:0] wmem [NPOS][N_IN][N_CLS];

  always_ff @(posedge clk) begin
    if (wr_en) wmem[wr_pos][wr_map][wr_cls] <= wr_data;
  end

  // stage A: position count and weight read
  logic [PW-1:0]           pos;
  logic                    a_valid, a_last;
  act_t                    a_data [N_IN];
  logic signed [WGT_W-1:0] a_w    [N_IN][N_CLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos     <= '0;
      a_valid <= 1'b0;
      a_last  <= 1'b0;
    end else begin
      a_valid <= in_valid;
      a_last  <= in_valid && (pos == PW'(NPOS - 1));
      if (in_valid) pos <= (pos == PW'(NPOS - 1)) ? '0 : pos + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      a_data <= in_data;
      a_w    <= wmem[pos];
    end
  end

  // stage B: multiply-accumulate
  fc_acc_t term [N_CLS];
  always_comb begin
    for (int c = 0; c < N_CLS; c++) begin
      term[c] = '0;
      for (int i = 0; i < N_IN; i++)
        term[c] += fc_acc_t'($signed({1'b0, a_data[i]}) * a_w[i][c]);
    end
  end

  fc_acc_t acc [N_CLS];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < N_CLS; c++) begin
        acc[c]       <= '0;
        out_score[c] <= '0;
      end
    end else begin
      out_valid <= a_valid && a_last;
      if (a_valid) begin
        for (int c = 0; c < N_CLS; c++) begin
          if (a_last) begin
            out_score[c] <= acc[c] + term[c] + (fc_acc_t'(bias[c]) <<< ACT_W);
            acc[c]       <= '0;
          end else begin
            acc[c] <= acc[c] + term[c];
          end
        end
      end
    end
  end

endmodule
