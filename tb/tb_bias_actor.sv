// tb_bias_actor -- self-checking test of the bias actor: random biases over
// the whole 5-bit range and random accumulator values; each result must be
// acc + bias*256 (bias aligned to the activation scale) one clock later.
module tb_bias_actor;
  import dreamnet_pkg::*;
  localparam int WGT_W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic signed [WGT_W-1:0] bias = '0;
  logic in_valid = 0;
  acc_t in_acc = '0;
  logic out_valid;
  acc_t out_acc;
  bias_actor #(.WGT_W(WGT_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int exp_q[$], expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: spurious"); end
    else begin
      automatic int e = exp_q.pop_front(), ec = expc_q.pop_front();
      if (int'(out_acc) != e) begin failures++; $display("FAIL: got %0d exp %0d", out_acc, e); end
      if (cyc != ec) begin failures++; $display("FAIL: latency"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int b = (t < 32) ? t - 16 : $signed($urandom_range(0, 31)) - 16;
      automatic int a = $signed($urandom_range(0, 1 << 20)) - (1 << 19);
      @(posedge clk);
      if ($urandom_range(0, 3) != 0) begin
        bias <= WGT_W'(b); in_valid <= 1'b1; in_acc <= acc_t'(a);
        exp_q.push_back(a + b * 256); expc_q.push_back(cyc + 2);
      end else in_valid <= 1'b0;
    end
    @(posedge clk); in_valid <= 1'b0;
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
