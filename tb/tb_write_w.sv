// tb_write_w: streams 8*64 doubles in, with random gaps and a memory that
// refuses writes at random, and checks every written word and address,
// a single done pulse, and that with a ready memory 64 words need no more
// than 8*64 + 3 cycles.
module tb_write_w;
  import nek_pkg::*;
  logic clk = 0, rst_n, start, done, in_valid, in_ready, mem_wr_valid, mem_wr_ready;
  logic [31:0] base, count, mem_wr_addr;
  dbl_t in_data;
  word_t mem_wr_data;
  int checks = 0, failures = 0, dones = 0, words = 0;
  dbl_t sent [$];

  write_w #(.ADDR_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (done) dones <= dones + 1;
    if (mem_wr_valid && mem_wr_ready) begin
      checks++;
      if (mem_wr_addr !== base + 32'(words)) failures++;
      for (int q = 0; q < 8; q++) begin
        checks++;
        if (mem_wr_data[64*q +: 64] !== sent[8*words + q]) failures++;
      end
      words <= words + 1;
    end
  end

  task automatic run(input bit st, output int cyc);
    int n;
    n = 0; cyc = 0; words = 0; dones = 0; sent.delete();
    @(posedge clk); #1 start = 1; count = 64;
    @(posedge clk); #1 start = 0;
    while (dones == 0) begin
      in_valid = (n < 512) && (!st || $urandom % 3 != 0);
      in_data = {$urandom, $urandom};
      mem_wr_ready = !st || ($urandom % 3 != 0);
      @(posedge clk);
      if (in_valid && in_ready) begin sent.push_back(in_data); n++; end
      #1 cyc++;
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (dones != 1 || words != 64) failures++;
  endtask

  initial begin
    int c;
    rst_n = 0; start = 0; base = 32'h2000; count = 0; in_valid = 0; in_data = 0; mem_wr_ready = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run(1'b1, c);
    base = 32'h9000;
    run(1'b0, c);
    checks++;
    if (c > 8 * 64 + 3) begin failures++; $display("took %0d cycles", c); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
