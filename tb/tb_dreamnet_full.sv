// tb_dreamnet_full -- full-size run of the Dreamnet pipeline with every
// parameter at its default: 256x256 frames, 4/6/8 neurons, 5-bit weights.
// Random weights and biases are applied, all 288,000 FC weights are written
// through the RAM port, then two random frames are streamed back to back at
// one pixel per clock. Both class decisions and scores are compared with the
// integer reference model, and the two results must leave exactly 65,536
// clocks (one frame time) apart, the rate behind 883 frames/s at 57.93 MHz.
module tb_dreamnet_full;
  import dreamnet_pkg::*;
  import dreamnet_ref_pkg::*;
  localparam int IW = 256, IH = 256, N1 = 4, N2 = 6, N3 = 8, WGT_W = 5, NC = 10;
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

  dreamnet_top dut (.*);

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
    conv_layer(img, 1, IW, IH, w1, b1, N1, WGT_W, a1);
    pool_layer(a1, N1, C1W, C1H, p1);
    conv_layer(p1, N1, S1W, S1H, w2, b2, N2, WGT_W, a2);
    pool_layer(a2, N2, C2W, C2H, p2);
    conv_layer(p2, N2, S2W, S2H, w3, b3, N3, WGT_W, a3);
    fc_layer(a3, N3, NPOS, wf, bf, NC, sc);
    if (keep) begin exp_k.push_back(argmax(sc)); exp_s.push_back(sc[argmax(sc)]); end
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
    foreach (a[k]) a[k] = $signed($urandom_range(0, 31)) - 16;
  endfunction

  initial begin
    rand_w(w1, N1*9);     rand_w(b1, N1);
    rand_w(w2, N2*N1*9);  rand_w(b2, N2);
    rand_w(w3, N3*N2*9);  rand_w(b3, N3);
    rand_w(wf, NPOS*N3*NC); rand_w(bf, NC);
    // positive biases in C1 keep the first layer mostly active
    foreach (b1[k]) b1[k] = $urandom_range(0, 15);
    // smaller kernels in C2 and C3 keep the deeper maps out of saturation
    foreach (w2[k]) w2[k] = w2[k] / 4;
    foreach (w3[k]) w3[k] = w3[k] / 4;
    for (int o = 0; o < N1; o++) begin c1_b[o] = WGT_W'(b1[o]); for (int k = 0; k < 9; k++) c1_w[o][0][k] = WGT_W'(w1[o*9 + k]); end
    for (int o = 0; o < N2; o++) begin c2_b[o] = WGT_W'(b2[o]); for (int i = 0; i < N1; i++) for (int k = 0; k < 9; k++) c2_w[o][i][k] = WGT_W'(w2[(o*N1 + i)*9 + k]); end
    for (int o = 0; o < N3; o++) begin c3_b[o] = WGT_W'(b3[o]); for (int i = 0; i < N2; i++) for (int k = 0; k < 9; k++) c3_w[o][i][k] = WGT_W'(w3[(o*N2 + i)*9 + k]); end
    for (int c = 0; c < NC; c++) fc_b[c] = WGT_W'(bf[c]);
    repeat (3) @(posedge clk); rst_n = 1;

    for (int idx = 0; idx < NPOS*N3*NC; idx++) begin
      @(posedge clk);
      fc_wr_en <= 1'b1; fc_wr_pos <= PW'(idx / (N3*NC)); fc_wr_map <= MW'((idx / NC) % N3);
      fc_wr_cls <= 4'(idx % NC); fc_wr_data <= WGT_W'(wf[idx]);
    end
    @(posedge clk); fc_wr_en <= 1'b0;

    check_spacing = 1;
    for (int f = 0; f < 2; f++) begin stream_frame(0, 1, 0); if (f > 0) n_b2b++; end
    @(posedge clk); pix_valid <= 1'b0;
    wait (exp_k.size() == 0);
    repeat (5) @(posedge clk);
    checks++;
    if (n_results != 2 || n_spacing != 1 || res_overflow) begin failures++; $display("FAIL: %0d results, %0d spacing checks", n_results, n_spacing); end
    $display("full size: %0d results, classes %b, relu clipped %0d, saturated %0d", n_results, classes_seen, n_relu_zero, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
