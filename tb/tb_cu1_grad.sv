// tb_cu1_grad: compute unit 1 at polynomial order 8 on four elements of
// random u, with random dxm1 (dxtm1 its transpose) served by three stalling
// memory ports and random stalls on the three output streams. ur, us and ut
// are compared bit for bit with pairwise-tree dot products computed here.
// A second run with a ready memory and ready outputs must deliver the four
// elements at one point per cycle after the first element is buffered.
module tb_cu1_grad;
  import nek_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned NPTS = N * N * N;
  localparam int unsigned NE = 4;
  `include "nek_ref.svh"
  logic clk = 0, rst_n, start, busy;
  bit stall = 1;
  logic [31:0] nelt, u_base, dxm1_base, dxtm1_base;
  logic [2:0] mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic [2:0][31:0] mem_req_addr, lookup_addr;
  word_t [2:0] mem_rsp_data, lookup_data;
  logic [2:0] grad_valid, grad_ready;
  dbl_t [2:0] grad_data;
  real u [NE*NPTS];
  real dm [N*N], dt [N*N];
  dbl_t expv [3][NE*NPTS];
  int cnt [3];
  int checks = 0, failures = 0;

  cu1_grad #(.N(N)) dut (.*);
  for (genvar p = 0; p < 3; p++) begin : g_mem
    hbm_rd_model #(.AW(32), .LAT(6)) u_mem (.clk, .rst_n, .stall,
      .req_valid(mem_req_valid[p]), .req_ready(mem_req_ready[p]), .req_addr(mem_req_addr[p]),
      .rsp_valid(mem_rsp_valid[p]), .rsp_ready(mem_rsp_ready[p]), .rsp_data(mem_rsp_data[p]),
      .lookup_addr(lookup_addr[p]), .lookup_data(lookup_data[p]));
  end
  always_comb begin
    for (int q = 0; q < 8; q++) begin
      lookup_data[0][64*q +: 64] = $realtobits(u[(8*(lookup_addr[0] - u_base) + q) % (NE*NPTS)]);
      lookup_data[1][64*q +: 64] = $realtobits(dm[(8*(lookup_addr[1] - dxm1_base) + q) % (N*N)]);
      lookup_data[2][64*q +: 64] = $realtobits(dt[(8*(lookup_addr[2] - dxtm1_base) + q) % (N*N)]);
    end
  end
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    for (int d = 0; d < 3; d++) begin
      if (rst_n && grad_valid[d] && grad_ready[d]) begin
        checks++;
        if (grad_data[d] !== expv[d][cnt[d]]) begin
          failures++;
          if (failures < 5) $display("dir %0d point %0d: %h vs %h", d, cnt[d], grad_data[d], expv[d][cnt[d]]);
        end
        cnt[d]++;
      end
      grad_ready[d] <= !stall || ($urandom % 3 != 0);
    end
  end

  task automatic run(output int t);
    cnt = '{0, 0, 0};
    @(posedge clk); #0.1 start = 1;
    @(posedge clk); #0.1 start = 0;
    t = 0;
    while (cnt[0] < NE*NPTS || cnt[1] < NE*NPTS || cnt[2] < NE*NPTS) begin @(posedge clk); t++; end
  endtask

  initial begin
    real v [N];
    int t;
    foreach (u[i]) u[i] = rnd_real();
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) dm[r + N*c] = rnd_real();
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) dt[r + N*c] = dm[c + N*r];
    for (int e = 0; e < NE; e++)
      for (int z = 0; z < N; z++) for (int y = 0; y < N; y++) for (int x = 0; x < N; x++) begin
        for (int l = 0; l < N; l++) v[l] = dm[x + N*l] * u[e*NPTS + idx(l, y, z)];
        expv[0][e*NPTS + idx(x,y,z)] = $realtobits(tree_sum(v));
        for (int l = 0; l < N; l++) v[l] = dt[l + N*y] * u[e*NPTS + idx(x, l, z)];
        expv[1][e*NPTS + idx(x,y,z)] = $realtobits(tree_sum(v));
        for (int l = 0; l < N; l++) v[l] = dt[l + N*z] * u[e*NPTS + idx(x, y, l)];
        expv[2][e*NPTS + idx(x,y,z)] = $realtobits(tree_sum(v));
      end
    rst_n = 0; start = 0; nelt = NE; u_base = 32'h1000; dxm1_base = 32'h8000; dxtm1_base = 32'h9000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(t);
    stall = 0;
    repeat (20) @(posedge clk);
    run(t);
    checks++;
    if (t > NE*NPTS + NPTS/8 + 40) begin failures++; $display("%0d cycles", t); end
    $display("ready run: %0d cycles for %0d points", t, NE*NPTS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
