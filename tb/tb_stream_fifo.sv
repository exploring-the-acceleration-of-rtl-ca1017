// tb_stream_fifo: random pushes and pops against a queue scoreboard; checks
// data order, that a full queue (16 words) refuses a 17th and that an empty
// queue shows no valid data.
module tb_stream_fifo;
  logic clk = 0, rst_n;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data, out_data;
  logic [63:0] sb [$];
  int checks = 0, failures = 0;
  stream_fifo #(.W(64), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sb.push_back(in_data);
    if (out_valid && out_ready) begin
      checks++;
      if (sb.size() == 0 || out_data !== sb[0]) failures++;
      if (sb.size() > 0) void'(sb.pop_front());
    end
  end

  initial begin
    rst_n = 0; in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (out_valid) failures++;
    // fill without popping
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; in_data = 64'(i) + 64'h1000;
      @(posedge clk); #1;
    end
    checks++; if (in_ready || sb.size() != 16) failures++;
    in_valid = 0;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      in_valid = ($urandom % 3 != 0); in_data = {$urandom, $urandom};
      out_ready = ($urandom % 3 != 0);
      @(posedge clk); #1;
    end
    in_valid = 0; out_ready = 1;
    repeat (20) @(posedge clk);
    #1 checks++; if (out_valid || sb.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
