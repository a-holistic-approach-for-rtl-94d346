// tb_sum_actor -- self-checking test of the Sum actor with 4 inputs: random
// accumulator values (including extremes) on a randomly gapped stream; each
// result must equal the integer sum and appear exactly one clock later.
module tb_sum_actor;
  import dreamnet_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid [N];
  acc_t in_acc [N];
  logic out_valid;
  acc_t out_acc;
  sum_actor #(.N_IN(N)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  longint exp_q[$]; int expc_q[$];
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: spurious"); end
    else begin
      automatic longint e = exp_q.pop_front(); automatic int ec = expc_q.pop_front();
      if (longint'(out_acc) != e) begin failures++; $display("FAIL: got %0d exp %0d", out_acc, e); end
      if (cyc != ec) begin failures++; $display("FAIL: latency"); end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin in_valid[i] = 0; in_acc[i] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(posedge clk);
      if ($urandom_range(0, 3) != 0) begin
        automatic longint s = 0;
        for (int i = 0; i < N; i++) begin
          automatic int v = (t < 4) ? ((t % 2) ? -(1 << 21) : (1 << 21) - 1) : $signed($urandom_range(0, 1 << 21)) - (1 << 20);
          in_valid[i] <= 1'b1; in_acc[i] <= acc_t'(v); s += v;
        end
        exp_q.push_back(s); expc_q.push_back(cyc + 2);
      end else
        for (int i = 0; i < N; i++) in_valid[i] <= 1'b0;
    end
    @(posedge clk); for (int i = 0; i < N; i++) in_valid[i] <= 1'b0;
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
