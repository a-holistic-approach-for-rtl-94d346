// dreamnet_top -- the Dreamnet optical-character-recognition CNN as a pure
// dataflow pipeline, in its I1 configuration: 4, 6 and 8 neurons in the
// three convolution layers and 5-bit weights and biases.
//
//   pixels -> C1 (conv 3x3, 1->N1) -> S1 (2x2 max) -> C2 (conv 3x3, N1->N2)
//          -> S2 (2x2 max) -> C3 (conv 3x3, N2->N3) -> FC (10 classes)
//          -> classifier (argmax) -> result FIFO -> host
//
// Every layer is a fixed set of hardware actors working concurrently on the
// pixel stream, one input pixel per clock, so a frame of IMG_W x IMG_H pixels
// takes IMG_W*IMG_H clocks and frames may follow each other without a gap.
// At 256x256 the maps shrink 256 -> 254 -> 127 -> 125 -> 62 -> 60.
// One result (class index 0..9 and its score) leaves per frame through a
// small valid/ready FIFO; if the host lets it fill up, further results are
// dropped and res_overflow is set.
//
// Weights and biases are inputs in the B-bit (WGT_W) format: conv kernels and
// biases as arrays, the FC weights through a RAM write port (fc_wr_*).
// The layer structure, neuron counts, kernel sizes, weight width and pixel
// rate follow the paper; the number formats, valid-region convolutions,
// weight ports, argmax in place of softmax and the output FIFO are this
// design's choices.
module dreamnet_top
  import dreamnet_pkg::*;
#(
  parameter int unsigned IMG_W      = 256,
  parameter int unsigned IMG_H      = 256,
  parameter int unsigned N1         = 4,
  parameter int unsigned N2         = 6,
  parameter int unsigned N3         = 8,
  parameter int unsigned WGT_W      = 5,
  parameter int unsigned OUT_DEPTH  = 4,
  // feature-map geometry along the pipeline
  localparam int unsigned C1_W = IMG_W - 2,  C1_H = IMG_H - 2,
  localparam int unsigned S1_W = C1_W / 2,   S1_H = C1_H / 2,
  localparam int unsigned C2_W = S1_W - 2,   C2_H = S1_H - 2,
  localparam int unsigned S2_W = C2_W / 2,   S2_H = C2_H / 2,
  localparam int unsigned C3_W = S2_W - 2,   C3_H = S2_H - 2,
  localparam int unsigned NPOS = C3_W * C3_H,
  localparam int unsigned PW   = (NPOS > 1) ? $clog2(NPOS) : 1,
  localparam int unsigned MW   = (N3 > 1) ? $clog2(N3) : 1,
  localparam int unsigned KW   = $clog2(NUM_CLASSES)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // pixel stream, raster order
  input  logic                    pix_valid,
  input  act_t                    pix_data,
  // trained parameters
  input  logic signed [WGT_W-1:0] c1_w [N1][1][KTAPS],
  input  logic signed [WGT_W-1:0] c1_b [N1],
  input  logic signed [WGT_W-1:0] c2_w [N2][N1][KTAPS],
  input  logic signed [WGT_W-1:0] c2_b [N2],
  input  logic signed [WGT_W-1:0] c3_w [N3][N2][KTAPS],
  input  logic signed [WGT_W-1:0] c3_b [N3],
  input  logic                    fc_wr_en,
  input  logic [PW-1:0]           fc_wr_pos,
  input  logic [MW-1:0]           fc_wr_map,
  input  logic [KW-1:0]           fc_wr_cls,
  input  logic signed [WGT_W-1:0] fc_wr_data,
  input  logic signed [WGT_W-1:0] fc_b [NUM_CLASSES],
  // classification results
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic [KW-1:0]           res_class,
  output fc_acc_t                 res_score,
  output logic                    res_overflow
);
  typedef struct packed {
    logic [KW-1:0] cls;
    fc_acc_t       score;
  } result_t;

  act_t pix [1];
  assign pix[0] = pix_data;

  logic c1_v, s1_v, c2_v, s2_v, c3_v, fc_v, cl_v;
  act_t c1_d [N1];
  act_t s1_d [N1];
  act_t c2_d [N2];
  act_t s2_d [N2];
  act_t c3_d [N3];
  fc_acc_t       fc_s [NUM_CLASSES];
  logic [KW-1:0] cl_k;
  fc_acc_t       cl_s;
  result_t       res_in, res_out;
  logic          res_in_ready;

  conv_layer #(.N_IN(1), .N_OUT(N1), .IMG_W(IMG_W), .IMG_H(IMG_H), .WGT_W(WGT_W)) u_c1 (
    .clk, .rst_n, .in_valid(pix_valid), .in_data(pix), .weights(c1_w), .bias(c1_b),
    .out_valid(c1_v), .out_data(c1_d));

  pool_layer #(.N(N1), .IMG_W(C1_W), .IMG_H(C1_H)) u_s1 (
    .clk, .rst_n, .in_valid(c1_v), .in_data(c1_d), .out_valid(s1_v), .out_data(s1_d));

  conv_layer #(.N_IN(N1), .N_OUT(N2), .IMG_W(S1_W), .IMG_H(S1_H), .WGT_W(WGT_W)) u_c2 (
    .clk, .rst_n, .in_valid(s1_v), .in_data(s1_d), .weights(c2_w), .bias(c2_b),
    .out_valid(c2_v), .out_data(c2_d));

  pool_layer #(.N(N2), .IMG_W(C2_W), .IMG_H(C2_H)) u_s2 (
    .clk, .rst_n, .in_valid(c2_v), .in_data(c2_d), .out_valid(s2_v), .out_data(s2_d));

  conv_layer #(.N_IN(N2), .N_OUT(N3), .IMG_W(S2_W), .IMG_H(S2_H), .WGT_W(WGT_W)) u_c3 (
    .clk, .rst_n, .in_valid(s2_v), .in_data(s2_d), .weights(c3_w), .bias(c3_b),
    .out_valid(c3_v), .out_data(c3_d));

  fc_layer #(.N_IN(N3), .MAP_W(C3_W), .MAP_H(C3_H), .N_CLS(NUM_CLASSES), .WGT_W(WGT_W)) u_fc (
    .clk, .rst_n,
    .wr_en(fc_wr_en), .wr_pos(fc_wr_pos), .wr_map(fc_wr_map), .wr_cls(fc_wr_cls),
    .wr_data(fc_wr_data), .bias(fc_b),
    .in_valid(c3_v), .in_data(c3_d), .out_valid(fc_v), .out_score(fc_s));

  argmax_classifier #(.N_CLS(NUM_CLASSES)) u_cls (
    .clk, .rst_n, .in_valid(fc_v), .in_score(fc_s),
    .out_valid(cl_v), .out_class(cl_k), .out_score(cl_s));

  assign res_in = '{cls: cl_k, score: cl_s};

  stream_fifo #(.W($bits(result_t)), .DEPTH(OUT_DEPTH)) u_out (
    .clk, .rst_n,
    .in_valid(cl_v), .in_ready(res_in_ready), .in_data(res_in),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_out),
    .overflow(res_overflow));

  assign res_class = res_out.cls;
  assign res_score = res_out.score;

  initial begin
    assert (C3_W >= 1 && C3_H >= 1)
      else $fatal(1, "dreamnet_top: image %0dx%0d too small for three 3x3 convolutions and two poolings", IMG_W, IMG_H);
  end

endmodule
