// tb_dreamnet_i2 -- runs the smaller I2 network (3, 5, 7 neurons, 3-bit
// weights) on the I1 hardware (4, 6, 8 neurons, 5-bit weights), at 28x28.
// The spare neurons get zero weights and biases, and every 3-bit weight code
// (2 fraction bits) is written as code*4 in the 5-bit format, which is the
// same value. The reference model computes the I2 network at its own sizes
// and widths; the hardware must give the same class, and a score exactly 4
// times the I2 score (two more fraction bits), for four back-to-back frames.
module tb_dreamnet_i2;
  import dreamnet_pkg::*;
  import dreamnet_ref_pkg::*;
  localparam int IW = 28, IH = 28, N1 = 4, N2 = 6, N3 = 8, WGT_W = 5, NC = 10;
  localparam int C1W = IW-2, C1H = IH-2, S1W = C1W/2, S1H = C1H/2, C2W = S1W-2, C2H = S1H-2;
  localparam int S2W = C2W/2, S2H = C2H/2, C3W = S2W-2, C3H = S2H-2, NPOS = C3W*C3H;
  localparam int PW = (NPOS > 1) ? $clog2(NPOS) : 1, MW = $clog2(N3);
  localparam int WATCHDOG = 40 * IW * IH + 40 * NPOS * N3 * NC + 10000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic pix_valid = 0;
  act_t pix_data = '0;
  logic signed [WGT_W-1:0] c1_w [N1][1][KTAPS];
  logic signed [WGT_W-1:0] c1_b [N1];
  logic signed [WGT_W-1:0] c2_w [N2][N1][KTAPS];
  logic signed [WGT_W-1:0] c2_b [N2];
  logic signed [WGT_W-1:0] c3_w [N3][N2][KTAPS];
  logic signed [WGT_W-1:0] c3_b [N3];
  logic fc_wr_en = 0;
  logic [PW-1:0] fc_wr_pos = '0;
  logic [MW-1:0] fc_wr_map = '0;
  logic [3:0] fc_wr_cls = '0;
  logic signed [WGT_W-1:0] fc_wr_data = '0;
  logic signed [WGT_W-1:0] fc_b [NC];
  logic res_valid, res_ready = 1, res_overflow;
  logic [3:0] res_class;
  fc_acc_t res_score;

  dreamnet_top #(.IMG_W(IW), .IMG_H(IH)) dut (.*);

  // the I2 network
  localparam int M1 = 3, M2 = 5, M3 = 7, B2 = 3;

  int checks = 0, failures = 0, cyc = 0;
  int w1[], b1[], w2[], b2[], w3[], b3[], wf[], bf[];
  int exp_k[$]; longint exp_s[$];
  int n_results = 0, last_res_cyc = -1, n_spacing = 0;
  int n_b2b = 0, n_gap = 0, n_stall = 0, n_full = 0;
  bit check_spacing = 0;
  int classes_seen = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (res_valid && !res_ready) n_stall++;
    if (!dut.res_in_ready) n_full++;
    if (res_valid && res_ready) begin
      n_results++;
      checks += 2;
      if (exp_k.size() == 0) begin failures++; $display("FAIL: unexpected result"); end
      else begin
        automatic int k = exp_k.pop_front();
        automatic longint s = exp_s.pop_front();
        classes_seen |= 1 << k;
        if (int'(res_class) != k) begin failures++; $display("FAIL: class %0d exp %0d", res_class, k); end
        if (longint'(res_score) != s) begin failures++; $display("FAIL: score %0d exp %0d", res_score, s); end
      end
      if (check_spacing && last_res_cyc >= 0) begin
        checks++; n_spacing++;
        if (cyc - last_res_cyc != IW*IH) begin failures++; $display("FAIL: results %0d clocks apart, exp %0d", cyc - last_res_cyc, IW*IH); end
      end
      last_res_cyc = cyc;
    end
  end

  // expected class and score of a frame
  task automatic expect_frame(input int img[], input bit keep);
    int a1[], p1[], a2[], p2[], a3[];
    longint sc[];
    conv_layer(img, 1, IW, IH, w1, b1, M1, B2, a1);
    pool_layer(a1, M1, C1W, C1H, p1);
    conv_layer(p1, M1, S1W, S1H, w2, b2, M2, B2, a2);
    pool_layer(a2, M2, C2W, C2H, p2);
    conv_layer(p2, M2, S2W, S2H, w3, b3, M3, B2, a3);
    fc_layer(a3, M3, NPOS, wf, bf, NC, sc);
    if (keep) begin exp_k.push_back(argmax(sc)); exp_s.push_back(4 * sc[argmax(sc)]); end
  endtask

  task automatic stream_frame(input bit gaps, input bit keep, input bit host_random);
    int img[];
    int lo = $urandom_range(0, 224);
    int span = $urandom_range(0, 255 - lo);
    img = new[IW*IH];
    // frames differ in brightness and contrast, so that they reach different classes
    foreach (img[k]) img[k] = lo + $urandom_range(0, span);
    expect_frame(img, keep);
    for (int p = 0; p < IW*IH; p++) begin
      if (gaps) while ($urandom_range(0, 3) == 0) begin
        @(posedge clk); pix_valid <= 1'b0; n_gap++;
        if (host_random) res_ready <= $urandom_range(0, 1);
      end
      @(posedge clk); pix_valid <= 1'b1; pix_data <= act_t'(img[p]);
      if (host_random) res_ready <= $urandom_range(0, 1);
    end
  endtask

  function automatic void rand_w(ref int a[], input int n);
    a = new[n];
    foreach (a[k]) a[k] = $signed($urandom_range(0, 7)) - 4;   // 3-bit codes
  endfunction

  initial begin
    rand_w(w1, M1*9);     rand_w(b1, M1);
    rand_w(w2, M2*M1*9);  rand_w(b2, M2);
    rand_w(w3, M3*M2*9);  rand_w(b3, M3);
    rand_w(wf, NPOS*M3*NC); rand_w(bf, NC);
    foreach (b1[k]) b1[k] = $urandom_range(0, 3);
    // embed I2 into the I1 hardware: unused neurons and inputs get zeros
    for (int o = 0; o < N1; o++) begin
      c1_b[o] = (o < M1) ? WGT_W'(4 * b1[o]) : '0;
      for (int k = 0; k < 9; k++) c1_w[o][0][k] = (o < M1) ? WGT_W'(4 * w1[o*9 + k]) : '0;
    end
    for (int o = 0; o < N2; o++) begin
      c2_b[o] = (o < M2) ? WGT_W'(4 * b2[o]) : '0;
      for (int i = 0; i < N1; i++) for (int k = 0; k < 9; k++)
        c2_w[o][i][k] = (o < M2 && i < M1) ? WGT_W'(4 * w2[(o*M1 + i)*9 + k]) : '0;
    end
    for (int o = 0; o < N3; o++) begin
      c3_b[o] = (o < M3) ? WGT_W'(4 * b3[o]) : '0;
      for (int i = 0; i < N2; i++) for (int k = 0; k < 9; k++)
        c3_w[o][i][k] = (o < M3 && i < M2) ? WGT_W'(4 * w3[(o*M2 + i)*9 + k]) : '0;
    end
    for (int c = 0; c < NC; c++) fc_b[c] = WGT_W'(4 * bf[c]);
    repeat (3) @(posedge clk); rst_n = 1;

    for (int idx = 0; idx < NPOS*N3*NC; idx++) begin
      automatic int p = idx / (N3*NC), i = (idx / NC) % N3, c = idx % NC;
      @(posedge clk);
      fc_wr_en <= 1'b1; fc_wr_pos <= PW'(p); fc_wr_map <= MW'(i); fc_wr_cls <= 4'(c);
      fc_wr_data <= (i < M3) ? WGT_W'(4 * wf[(p*M3 + i)*NC + c]) : '0;
    end
    @(posedge clk); fc_wr_en <= 1'b0;

    check_spacing = 1;
    for (int f = 0; f < 4; f++) begin stream_frame(0, 1, 0); if (f > 0) n_b2b++; end
    @(posedge clk); pix_valid <= 1'b0;
    wait (exp_k.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (n_results != 4 || n_spacing != 3 || res_overflow) begin failures++; $display("FAIL: %0d results, %0d spacing checks", n_results, n_spacing); end
    $display("I2 on I1 hardware: %0d results, classes %b, relu clipped %0d, saturated %0d", n_results, classes_seen, n_relu_zero, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
