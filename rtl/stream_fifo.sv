// stream_fifo: first-in first-out queue joining two dataflow stages.
//
// Every stage of the kernel runs concurrently and hands data to the next
// through a stream; in the original design these are streams of depth 16,
// which is the default DEPTH here. Both sides use a valid/ready handshake: a
// word moves when valid and ready are high at the same rising edge.
// in_ready is low only when the queue is full; out_valid is high whenever it
// holds a word, and out_data shows the oldest word (first-word fall-through,
// zero added latency beyond one cycle from write to read). Reset (active low,
// synchronous) empties the queue.
module stream_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;
  logic push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != 0);
  assign out_data  = mem[rd_ptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A word offered but not taken must stay put.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
