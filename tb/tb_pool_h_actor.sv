// tb_pool_h_actor -- self-checking test of the horizontal pooling actor on
// an odd-width (7-pixel) map of 4 rows, streamed twice (continuous, then with
// random gaps): each output must be the max of a column pair, the last
// column must be dropped, and the output must follow the odd-column pixel by
// one clock.
module tb_pool_h_actor;
  import dreamnet_pkg::*;
  localparam int W = 7, H = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  act_t in_data = '0;
  logic out_valid;
  act_t out_data;
  pool_h_actor #(.IMG_W(W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int exp_q[$], expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: spurious"); end
    else begin
      automatic int e = exp_q.pop_front(), ec = expc_q.pop_front();
      if (int'(out_data) != e) begin failures++; $display("FAIL: got %0d exp %0d", out_data, e); end
      if (ec >= 0) begin checks++; if (cyc != ec) begin failures++; $display("FAIL: latency"); end end
    end
  end

  task automatic run_frame(bit gaps);
    int row [W];
    for (int y = 0; y < H; y++) begin
      for (int x = 0; x < W; x++) row[x] = $urandom_range(0, 255);
      for (int x = 0; x < W; x++) begin
        if (gaps) while ($urandom_range(0, 2) == 0) begin @(posedge clk); in_valid <= 1'b0; end
        @(posedge clk); in_valid <= 1'b1; in_data <= act_t'(row[x]);
        if (x % 2 == 1) begin
          exp_q.push_back(row[x] > row[x-1] ? row[x] : row[x-1]);
          expc_q.push_back(gaps ? -1 : cyc + 2);
        end
      end
    end
    @(posedge clk); in_valid <= 1'b0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run_frame(0); run_frame(1);
    repeat (4) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
