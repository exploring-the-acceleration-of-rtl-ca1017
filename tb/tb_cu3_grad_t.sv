// tb_cu3_grad_t: compute unit 3 at polynomial order 8 on three elements.
// Random wr, ws, wt stream in with random gaps, dxtm1 and dxm1 come from
// two stalling memory ports and the write port refuses words at random.
// Every written word of w is compared bit for bit with
// (dxtm1*wr + ws*dxm1) + wt*dxm1 computed here with the same summation
// order, and done must pulse once, after the last word.
module tb_cu3_grad_t;
  import nek_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned NPTS = N * N * N;
  localparam int unsigned NE = 3;
  `include "nek_ref.svh"
  logic clk = 0, rst_n, start, done, mat_busy;
  bit stall = 1;
  logic [31:0] nelt, dxtm1_base, dxm1_base, w_base;
  logic [2:0] w_valid, w_ready;
  dbl_t [2:0] w_data;
  logic [1:0] mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic [1:0][31:0] mem_req_addr, lookup_addr;
  word_t [1:0] mem_rsp_data, lookup_data;
  logic mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_wr_addr;
  word_t mem_wr_data;
  real wi [3][NE*NPTS];
  real dm [N*N], dt [N*N];
  dbl_t wexp [NE*NPTS];
  int words = 0, dones = 0;
  int checks = 0, failures = 0;

  cu3_grad_t #(.N(N)) dut (.*);
  for (genvar p = 0; p < 2; p++) begin : g_mem
    hbm_rd_model #(.AW(32), .LAT(6)) u_mem (.clk, .rst_n, .stall,
      .req_valid(mem_req_valid[p]), .req_ready(mem_req_ready[p]), .req_addr(mem_req_addr[p]),
      .rsp_valid(mem_rsp_valid[p]), .rsp_ready(mem_rsp_ready[p]), .rsp_data(mem_rsp_data[p]),
      .lookup_addr(lookup_addr[p]), .lookup_data(lookup_data[p]));
  end
  always_comb for (int q = 0; q < 8; q++) begin
    lookup_data[0][64*q +: 64] = $realtobits(dt[(8*(lookup_addr[0] - dxtm1_base) + q) % (N*N)]);
    lookup_data[1][64*q +: 64] = $realtobits(dm[(8*(lookup_addr[1] - dxm1_base) + q) % (N*N)]);
  end
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    if (rst_n && done) dones++;
    if (rst_n && mem_wr_valid && mem_wr_ready) begin
      checks++;
      if (mem_wr_addr !== w_base + 32'(words)) failures++;
      for (int q = 0; q < 8; q++) begin
        checks++;
        if (mem_wr_data[64*q +: 64] !== wexp[8*words + q]) begin
          failures++;
          if (failures < 5) $display("w[%0d] %h vs %h", 8*words+q, mem_wr_data[64*q +: 64], wexp[8*words+q]);
        end
      end
      words++;
    end
    mem_wr_ready <= !stall || ($urandom % 3 != 0);
  end
  for (genvar d = 0; d < 3; d++) begin : g_src
    int ns = 0;
    always @(posedge clk) begin
      if (!rst_n) begin
        w_valid[d] <= 1'b0;
        ns = 0;
      end else begin
        if (w_valid[d] && w_ready[d]) ns++;
        if (!(w_valid[d] && !w_ready[d])) begin
          w_valid[d] <= (ns < NE*NPTS) && ($urandom % 4 != 0);
          w_data[d]  <= $realtobits(wi[d][ns % (NE*NPTS)]);
        end
      end
    end
  end

  initial begin
    real v [N];
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) dm[r + N*c] = rnd_real();
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) dt[r + N*c] = dm[c + N*r];
    for (int d = 0; d < 3; d++) for (int i = 0; i < NE*NPTS; i++) wi[d][i] = rnd_real();
    for (int e = 0; e < NE; e++)
      for (int z = 0; z < N; z++) for (int y = 0; y < N; y++) for (int x = 0; x < N; x++) begin
        real a, b, c;
        for (int l = 0; l < N; l++) v[l] = dt[x + N*l] * wi[0][e*NPTS + idx(l, y, z)];
        a = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dm[l + N*y] * wi[1][e*NPTS + idx(x, l, z)];
        b = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dm[l + N*z] * wi[2][e*NPTS + idx(x, y, l)];
        c = tree_sum(v);
        wexp[e*NPTS + idx(x,y,z)] = $realtobits((a + b) + c);
      end
    rst_n = 0; start = 0; nelt = NE; dxtm1_base = 32'h100; dxm1_base = 32'h200; w_base = 32'h5000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #0.1 start = 1;
    @(posedge clk); #0.1 start = 0;
    while (dones == 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (dones != 1 || words != NE*NPTS/8 || mat_busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
