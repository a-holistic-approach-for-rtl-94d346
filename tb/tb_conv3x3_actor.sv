// tb_conv3x3_actor -- self-checking test of one 3x3 convolution actor on a
// small 7x6 map. Frame 0 streams one pixel per clock and checks every result
// value and its 2-clock latency; frame 1 follows with random gaps in the
// stream and checks the values. Expected results are computed here directly
// from the 3x3 correlation formula.
module tb_conv3x3_actor;
  import dreamnet_pkg::*;
  localparam int W = 7, H = 6, WGT_W = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0;
  act_t in_data = '0;
  logic signed [WGT_W-1:0] weights [KTAPS];
  logic out_valid;
  acc_t out_acc;

  conv3x3_actor #(.IMG_W(W), .IMG_H(H), .WGT_W(WGT_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int exp_val[$], exp_cyc[$];
  int img [H][W];

  always @(posedge clk) cyc <= cyc + 1;

  // monitor on the falling edge
  always @(negedge clk) if (rst_n) begin
    if (in_valid) begin : track_in
      // nothing: expectations are queued by the driver
    end
    if (out_valid) begin
      int e, ec;
      checks++;
      if (exp_val.size() == 0) begin
        failures++; $display("FAIL: unexpected output %0d", out_acc);
      end else begin
        e = exp_val.pop_front(); ec = exp_cyc.pop_front();
        if (int'(out_acc) != e) begin failures++; $display("FAIL: got %0d exp %0d", out_acc, e); end
        if (ec >= 0) begin
          checks++;
          if (cyc != ec) begin failures++; $display("FAIL: latency, out at %0d exp %0d", cyc, ec); end
        end
      end
    end
  end

  function automatic int ref_conv(int y, int x);
    automatic int s = 0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        s += img[y-2+r][x-2+c] * int'(weights[3*r+c]);
    return s;
  endfunction

  task automatic run_frame(bit gaps);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = $urandom_range(0, 255);
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (gaps) while ($urandom_range(0, 2) == 0) begin
          @(posedge clk); in_valid <= 1'b0;
        end
        @(posedge clk);
        in_valid <= 1'b1;
        in_data  <= act_t'(img[y][x]);
        if (y >= 2 && x >= 2) begin
          exp_val.push_back(ref_conv(y, x));
          // input is seen at the next falling edge (cycle cyc+1); output 2 later
          exp_cyc.push_back(gaps ? -1 : cyc + 1 + 2);
        end
      end
    @(posedge clk); in_valid <= 1'b0;
  endtask

  initial begin
    for (int k = 0; k < KTAPS; k++) weights[k] = WGT_W'($urandom);
    weights[0] = -16; weights[8] = 15;   // extreme taps
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0);
    run_frame(1);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_val.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_val.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
