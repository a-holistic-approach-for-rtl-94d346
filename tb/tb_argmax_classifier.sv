// tb_argmax_classifier -- self-checking test of the class decision: random
// signed scores (also all-negative sets and ties) must yield the index of
// the largest score, the lowest index on a tie, with that score, one clock
// after in_valid.
module tb_argmax_classifier;
  import dreamnet_pkg::*;
  localparam int NC = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  fc_acc_t in_score [NC];
  logic out_valid;
  logic [3:0] out_class;
  fc_acc_t out_score;
  argmax_classifier #(.N_CLS(NC)) dut (.*);

  int checks = 0, failures = 0, cyc = 0, n_tie = 0;
  int expk_q[$], expc_q[$]; longint exps_q[$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (expk_q.size() == 0) begin failures++; $display("FAIL: spurious"); end
    else begin
      automatic int k = expk_q.pop_front();
      automatic longint s = exps_q.pop_front();
      automatic int ec = expc_q.pop_front();
      if (int'(out_class) != k) begin failures++; $display("FAIL: class %0d exp %0d", out_class, k); end
      if (longint'(out_score) != s) begin failures++; $display("FAIL: score"); end
      if (cyc != ec) begin failures++; $display("FAIL: latency"); end
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) in_score[c] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint v [NC];
      int k;
      for (int c = 0; c < NC; c++) begin
        v[c] = (t % 3 == 0) ? longint'($urandom_range(0, 7)) - 4            // many ties
             : (t % 3 == 1) ? -longint'($urandom_range(1, 1 << 30))         // all negative
             : longint'($signed($urandom));
      end
      k = 0;
      for (int c = 1; c < NC; c++) if (v[c] > v[k]) k = c;
      for (int c = k + 1; c < NC; c++) if (v[c] == v[k]) begin n_tie++; break; end
      @(posedge clk);
      if ($urandom_range(0, 4) != 0) begin
        in_valid <= 1'b1;
        for (int c = 0; c < NC; c++) in_score[c] <= fc_acc_t'(v[c]);
        expk_q.push_back(k); exps_q.push_back(v[k]); expc_q.push_back(cyc + 2);
      end else in_valid <= 1'b0;
    end
    @(posedge clk); in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    checks++; if (expk_q.size() != 0) begin failures++; $display("FAIL: missing"); end
    checks++; if (n_tie == 0) begin failures++; $display("FAIL: no tie exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
