// tb_mem_reader: two transfers through a stalling memory model; checks that
// exactly the requested words arrive in address order, that busy falls
// when the last one leaves, and, with a ready memory, that a transfer of
// 64 words runs at one word per cycle after the memory latency.
module tb_mem_reader;
  import nek_pkg::*;
  logic clk = 0, rst_n, start, busy, stall;
  logic [31:0] base, count;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready, out_valid, out_ready;
  logic [31:0] mem_req_addr, lookup_addr;
  word_t mem_rsp_data, out_data, lookup_data;
  int checks = 0, failures = 0;
  logic [31:0] expect_addr;
  int got;

  mem_reader #(.ADDR_W(32)) dut (.*);
  hbm_rd_model #(.AW(32), .LAT(6)) u_mem (.clk, .rst_n, .stall, .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid),
    .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data), .lookup_addr, .lookup_data);
  assign lookup_data = {16{lookup_addr * 32'h9E37_79B1}};
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_data !== {16{expect_addr * 32'h9E37_79B1}}) failures++;
    expect_addr <= expect_addr + 1;
    got <= got + 1;
  end

  task automatic xfer(input logic [31:0] b, input int n, input bit st, output int cyc);
    int t;
    stall = st; expect_addr = b; got = 0;
    @(posedge clk); #1 start = 1; base = b; count = n;
    @(posedge clk); #1 start = 0; t = 0;
    while (busy) begin
      out_ready = !st || ($urandom % 4 != 0);
      @(posedge clk); #1 t++;
    end
    cyc = t;
    checks++;
    if (got != n) begin failures++; $display("got %0d of %0d words", got, n); end
  endtask

  initial begin
    int c;
    rst_n = 0; start = 0; base = 0; count = 0; out_ready = 1; stall = 0;
    got = 0; expect_addr = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    xfer(32'h100, 300, 1'b1, c);
    xfer(32'h7000, 64, 1'b0, c);
    checks++;
    if (c > 64 + 12) begin failures++; $display("64 words took %0d cycles", c); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
