// tb_relu_actor -- self-checking test of the relu actor (5-bit weights, so
// 4 weight fraction bits are dropped): negative sums must give 0, positive
// sums acc/16 (integer division), clamped at 255; one clock of latency.
// Counts how often each of the three regions was exercised.
module tb_relu_actor;
  import dreamnet_pkg::*;
  localparam int WGT_W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  acc_t in_acc = '0;
  logic out_valid;
  act_t out_data;
  relu_actor #(.WGT_W(WGT_W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_neg = 0, n_sat = 0, n_lin = 0;
  int exp_q[$], expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: spurious"); end
    else begin
      automatic int e = exp_q.pop_front(), ec = expc_q.pop_front();
      if (int'(out_data) != e) begin failures++; $display("FAIL: got %0d exp %0d", out_data, e); end
      if (cyc != ec) begin failures++; $display("FAIL: latency"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int a = $signed($urandom_range(0, 12000)) - 4000;
      automatic int e;
      if (t == 0) a = 4095; if (t == 1) a = 4096; if (t == 2) a = -1; if (t == 3) a = 15;
      if (a < 0) begin e = 0; n_neg++; end
      else if (a / 16 > 255) begin e = 255; n_sat++; end
      else begin e = a / 16; n_lin++; end
      @(posedge clk);
      in_valid <= 1'b1; in_acc <= acc_t'(a);
      exp_q.push_back(e); expc_q.push_back(cyc + 2);
    end
    @(posedge clk); in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: missing"); end
    checks++; if (n_neg == 0 || n_sat == 0 || n_lin == 0) begin failures++; $display("FAIL: region not exercised"); end
    $display("relu regions: negative=%0d saturated=%0d linear=%0d", n_neg, n_sat, n_lin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
