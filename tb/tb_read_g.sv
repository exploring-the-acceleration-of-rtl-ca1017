// tb_read_g: reads two elements of g (N = 8, 384 words) from a stalling
// memory whose double at linear index i holds i; checks that record p
// carries the doubles 6p .. 6p+5 in order and that every record arrives.
module tb_read_g;
  import nek_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned NE = 2;
  logic clk = 0, rst_n, start, busy, stall;
  logic [31:0] nelt, base;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready, g_valid, g_ready;
  logic [31:0] mem_req_addr, lookup_addr;
  word_t mem_rsp_data, lookup_data;
  dbl_t [5:0] g_data;
  int checks = 0, failures = 0, recs = 0;

  read_g #(.N(N), .ADDR_W(32)) dut (.*);
  hbm_rd_model #(.AW(32), .LAT(5)) u_mem (.clk, .rst_n, .stall, .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .req_addr(mem_req_addr), .rsp_valid(mem_rsp_valid),
    .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data), .lookup_addr, .lookup_data);
  always_comb for (int q = 0; q < 8; q++) lookup_data[64*q +: 64] = 64'((lookup_addr - base) * 8 + q);
  always #5 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n && g_valid && g_ready) begin
    for (int j = 0; j < 6; j++) begin
      checks++;
      if (g_data[j] !== 64'(6 * recs + j)) failures++;
    end
    recs <= recs + 1;
  end

  initial begin
    rst_n = 0; start = 0; nelt = NE; base = 32'h4000; g_ready = 1; stall = 1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (busy) begin
      g_ready = ($urandom % 5 != 0);
      @(posedge clk); #1;
    end
    checks++;
    if (recs != NE * N * N * N) begin failures++; $display("%0d records", recs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
