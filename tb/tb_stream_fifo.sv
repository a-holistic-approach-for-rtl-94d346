// tb_stream_fifo -- self-checking test of the valid/ready FIFO (depth 4):
// random pushes and pops checked against a queue model, including runs where
// the reader stalls until the FIFO is full. Pushes offered while full must be
// dropped and set the sticky overflow flag; data order, in_ready and
// out_valid are checked every clock.
module tb_stream_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, overflow;
  logic [W-1:0] in_data = '0, out_data;
  stream_fifo #(.W(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_drop = 0, n_simul = 0;
  logic [W-1:0] model[$];
  bit exp_ovf = 0;

  // compare with the model at the falling edge
  always @(negedge clk) if (rst_n) begin
    checks += 3;
    if (in_ready != (model.size() < D)) begin failures++; $display("FAIL: in_ready"); end
    if (out_valid != (model.size() > 0)) begin failures++; $display("FAIL: out_valid"); end
    if (overflow != exp_ovf) begin failures++; $display("FAIL: overflow flag"); end
    if (out_valid && model.size() > 0) begin
      checks++;
      if (out_data != model[0]) begin failures++; $display("FAIL: data %0h exp %0h", out_data, model[0]); end
    end
  end

  // update the model with the transfers the rising edge performs
  always @(posedge clk) if (rst_n) begin
    if (model.size() == D) n_full++;
    if (in_valid && out_valid && out_ready && model.size() < D) n_simul++;
    if (out_valid && out_ready) void'(model.pop_front());
    if (in_valid) begin
      if (in_ready) model.push_back(in_data);
      else begin n_drop++; exp_ovf = 1; end
    end
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk); #1;
      in_valid  = ($urandom_range(0, 2) != 0);
      in_data   = W'($urandom);
      out_ready = (t % 100 < 30) ? 1'b0 : ($urandom_range(0, 1) == 1);
    end
    @(negedge clk); #1; in_valid = 0; out_ready = 1;
    repeat (8) @(posedge clk);
    checks++; if (n_full == 0 || n_drop == 0 || n_simul == 0) begin failures++; $display("FAIL: full/drop/simultaneous not exercised"); end
    $display("full cycles %0d, dropped %0d, push+pop %0d", n_full, n_drop, n_simul);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
