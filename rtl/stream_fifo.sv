// stream_fifo -- a dataflow FIFO channel with a valid/ready handshake on both
// sides, DEPTH entries of W bits, first-word-fall-through.
//
// A word moves in when in_valid && in_ready, and out when out_valid &&
// out_ready; both may happen in the same clock. in_ready is low only when the
// FIFO is full. A producer that cannot wait (such as the network, which has
// no backpressure) may offer a word while the FIFO is full: the word is then
// dropped and the sticky `overflow` flag is set until reset.
// Channels of this kind connect the actors in the paper's dataflow model;
// in this design the actors inside the network run in lockstep and need none,
// so one FIFO buffers the classification results toward the host.
module stream_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic         overflow
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (in_valid && !in_ready) overflow <= 1'b1;
    end
  end

  a_count_range: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
  a_hold_data:   assert property (@(posedge clk) disable iff (!rst_n)
                                  out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
