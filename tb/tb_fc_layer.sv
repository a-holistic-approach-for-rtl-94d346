// tb_fc_layer -- self-checking test of the fully connected layer with 3
// input maps of 3x2 values and 10 classes. All weights are loaded through
// the write port in random order, then three frames are streamed (the first
// two back to back, the third with gaps); every class score is compared with
// the reference dot product, out_valid must rise 2 clocks after the last
// token of a frame, and one set of scores must appear per frame.
module tb_fc_layer;
  import dreamnet_pkg::*;
  import dreamnet_ref_pkg::*;
  localparam int NI = 3, MW = 3, MH = 2, NC = 10, WGT_W = 5, NPOS = MW*MH;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0;
  logic [2:0] wr_pos = '0;
  logic [1:0] wr_map = '0;
  logic [3:0] wr_cls = '0;
  logic signed [WGT_W-1:0] wr_data = '0;
  logic signed [WGT_W-1:0] bias [NC];
  logic in_valid = 0;
  act_t in_data [NI];
  logic out_valid;
  fc_acc_t out_score [NC];
  fc_layer #(.N_IN(NI), .MAP_W(MW), .MAP_H(MH), .N_CLS(NC), .WGT_W(WGT_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, frames_out = 0;
  int wt[], b[], feat[];
  longint exp_s[$][];
  int expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    longint e[];
    automatic int ec = expc_q.size() ? expc_q.pop_front() : -2;
    frames_out++;
    if (exp_s.size() == 0) begin checks++; failures++; $display("FAIL: spurious scores"); end
    else begin
      e = exp_s.pop_front();
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (longint'(out_score[c]) != e[c]) begin failures++; $display("FAIL: class %0d got %0d exp %0d", c, out_score[c], e[c]); end
      end
    end
    if (ec != -1) begin checks++; if (cyc != ec) begin failures++; $display("FAIL: latency %0d vs %0d", cyc, ec); end end
  end

  task automatic run_frame(bit gaps);
    longint s[];
    feat = new[NI*NPOS];
    foreach (feat[k]) feat[k] = $urandom_range(0, 255);
    fc_layer(feat, NI, NPOS, wt, b, NC, s);
    exp_s.push_back(s);
    for (int p = 0; p < NPOS; p++) begin
      if (gaps) while ($urandom_range(0, 1) == 0) begin @(posedge clk); in_valid <= 1'b0; end
      @(posedge clk); in_valid <= 1'b1;
      for (int i = 0; i < NI; i++) in_data[i] <= act_t'(feat[i*NPOS + p]);
      if (p == NPOS - 1) expc_q.push_back(gaps ? -1 : cyc + 1 + 2);
    end
  endtask

  initial begin
    int order[];
    wt = new[NPOS*NI*NC]; b = new[NC];
    foreach (wt[k]) wt[k] = $signed($urandom_range(0, 31)) - 16;
    foreach (b[k]) begin b[k] = $signed($urandom_range(0, 31)) - 16; bias[k] = WGT_W'(b[k]); end
    for (int i = 0; i < NI; i++) in_data[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // load weights in a shuffled order
    order = new[NPOS*NI*NC];
    foreach (order[k]) order[k] = k;
    order.shuffle();
    foreach (order[k]) begin
      automatic int idx = order[k];
      @(posedge clk);
      wr_en <= 1'b1; wr_pos <= 3'(idx / (NI*NC)); wr_map <= 2'((idx / NC) % NI);
      wr_cls <= 4'(idx % NC); wr_data <= WGT_W'(wt[idx]);
    end
    @(posedge clk); wr_en <= 1'b0;
    run_frame(0); run_frame(0);
    @(posedge clk); in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    run_frame(1);
    @(posedge clk); in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (frames_out != 3) begin failures++; $display("FAIL: %0d score sets, exp 3", frames_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
