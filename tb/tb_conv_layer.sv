// tb_conv_layer -- self-checking test of a convolution layer with 2 input
// maps and 3 neurons on 6x5 maps (so sum, bias and relu actors are all in
// play). Every output of every neuron is compared with the reference model;
// the first frame streams one pixel per clock and also checks the 5-clock
// latency from the pixel completing a window to its result; the second
// frame has random gaps. ReLU clipping and saturation must both occur.
module tb_conv_layer;
  import dreamnet_pkg::*;
  import dreamnet_ref_pkg::*;
  localparam int NI = 2, NO = 3, W = 6, H = 5, WGT_W = 5;
  localparam int OW = W - 2, OH = H - 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  act_t in_data [NI];
  logic signed [WGT_W-1:0] weights [NO][NI][KTAPS];
  logic signed [WGT_W-1:0] bias [NO];
  logic out_valid;
  act_t out_data [NO];
  conv_layer #(.N_IN(NI), .N_OUT(NO), .IMG_W(W), .IMG_H(H), .WGT_W(WGT_W)) dut (.*);

  int checks = 0, failures = 0, got = 0, cyc = 0;
  int img[], wt[], b[], exp_out[];
  int expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int ec = (expc_q.size() > 0) ? expc_q.pop_front() : -2;
    for (int o = 0; o < NO; o++) begin
      checks++;
      if (got >= OW*OH || int'(out_data[o]) != exp_out[o*OW*OH + got]) begin
        failures++; $display("FAIL: neuron %0d pixel %0d got %0d", o, got, out_data[o]);
      end
    end
    if (ec != -1) begin
      checks++;
      if (cyc != ec) begin failures++; $display("FAIL: latency out at %0d exp %0d", cyc, ec); end
    end
    got++;
  end

  task automatic run_frame(bit gaps);
    img = new[NI*W*H];
    foreach (img[k]) img[k] = $urandom_range(0, 255);
    conv_layer(img, NI, W, H, wt, b, NO, WGT_W, exp_out);
    got = 0;
    for (int p = 0; p < W*H; p++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin @(posedge clk); in_valid <= 1'b0; end
      @(posedge clk); in_valid <= 1'b1;
      for (int i = 0; i < NI; i++) in_data[i] <= act_t'(img[i*W*H + p]);
      if (p / W >= 2 && p % W >= 2) expc_q.push_back(gaps ? -1 : cyc + 1 + 5);
    end
    @(posedge clk); in_valid <= 1'b0;
    repeat (8) @(posedge clk);
    checks++;
    if (got != OW*OH) begin failures++; $display("FAIL: %0d outputs, exp %0d", got, OW*OH); end
  endtask

  initial begin
    wt = new[NO*NI*9]; b = new[NO];
    foreach (wt[k]) wt[k] = $signed($urandom_range(0, 31)) - 16;
    foreach (b[k])  b[k]  = $signed($urandom_range(0, 31)) - 16;
    for (int o = 0; o < NO; o++) begin
      bias[o] = WGT_W'(b[o]);
      for (int i = 0; i < NI; i++) for (int k = 0; k < 9; k++) weights[o][i][k] = WGT_W'(wt[(o*NI + i)*9 + k]);
    end
    for (int i = 0; i < NI; i++) in_data[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_frame(0); run_frame(1);
    checks++;
    if (n_relu_zero == 0 || n_sat == 0) begin failures++; $display("FAIL: relu zero %0d / saturation %0d not both exercised", n_relu_zero, n_sat); end
    $display("relu clipped %0d, saturated %0d", n_relu_zero, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
