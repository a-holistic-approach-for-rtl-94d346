// tb_pool_layer -- self-checking test of a 3-map pooling layer on 7x6 maps:
// every output pixel of every map is compared with the 2x2 max computed by
// the reference model, over two frames (the second with random input gaps).
module tb_pool_layer;
  import dreamnet_pkg::*;
  import dreamnet_ref_pkg::*;
  localparam int N = 3, W = 7, H = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  act_t in_data [N];
  logic out_valid;
  act_t out_data [N];
  pool_layer #(.N(N), .IMG_W(W), .IMG_H(H)) dut (.*);

  int checks = 0, failures = 0, got = 0;
  int img[], exp_out[];

  always @(negedge clk) if (rst_n && out_valid) begin
    for (int m = 0; m < N; m++) begin
      checks++;
      if (got >= (W/2)*(H/2) || int'(out_data[m]) != exp_out[m*(W/2)*(H/2) + got]) begin
        failures++; $display("FAIL: map %0d pixel %0d got %0d", m, got, out_data[m]);
      end
    end
    got++;
  end

  task automatic run_frame(bit gaps);
    img = new[N*W*H];
    foreach (img[k]) img[k] = $urandom_range(0, 255);
    pool_layer(img, N, W, H, exp_out);
    got = 0;
    for (int p = 0; p < W*H; p++) begin
      if (gaps) while ($urandom_range(0, 2) == 0) begin @(posedge clk); in_valid <= 1'b0; end
      @(posedge clk); in_valid <= 1'b1;
      for (int m = 0; m < N; m++) in_data[m] <= act_t'(img[m*W*H + p]);
    end
    @(posedge clk); in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (got != (W/2)*(H/2)) begin failures++; $display("FAIL: %0d outputs, exp %0d", got, (W/2)*(H/2)); end
  endtask

  initial begin
    for (int m = 0; m < N; m++) in_data[m] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run_frame(0); run_frame(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
