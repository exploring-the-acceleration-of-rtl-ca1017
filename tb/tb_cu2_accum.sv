// tb_cu2_accum: compute unit 2 at polynomial order 8 on three elements.
// Random ur, us, ut arrive on three streams with independent random gaps,
// g comes from a stalling memory port, and the three output streams stall
// at random. wr, ws, wt are compared bit for bit with (a + b) + c sums of
// double products computed here.
module tb_cu2_accum;
  import nek_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned NPTS = N * N * N;
  localparam int unsigned NE = 3;
  `include "nek_ref.svh"
  logic clk = 0, rst_n, start, busy;
  bit stall = 1;
  logic [31:0] nelt, g_base;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  logic [31:0] mem_req_addr, lookup_addr;
  word_t mem_rsp_data, lookup_data;
  logic [2:0] grad_valid, grad_ready, w_valid, w_ready;
  dbl_t [2:0] grad_data, w_data;
  real gin [NE*NPTS*6];
  real gr [3][NE*NPTS];
  int cnt [3];
  int checks = 0, failures = 0;

  cu2_accum #(.N(N)) dut (.*);
  hbm_rd_model #(.AW(32), .LAT(6)) u_mem (.clk, .rst_n, .stall,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_addr(mem_req_addr),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_data(mem_rsp_data),
    .lookup_addr, .lookup_data);
  always_comb for (int q = 0; q < 8; q++)
    lookup_data[64*q +: 64] = $realtobits(gin[(8*(lookup_addr - g_base) + q) % (NE*NPTS*6)]);
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) begin
    for (int d = 0; d < 3; d++) begin
      if (rst_n && w_valid[d] && w_ready[d]) begin
        int i;
        real a, b, c, g0, g1, g2, g3, g4, g5;
        dbl_t e;
        i = cnt[d];
        a = gr[0][i]; b = gr[1][i]; c = gr[2][i];
        g0 = gin[6*i]; g1 = gin[6*i+1]; g2 = gin[6*i+2]; g3 = gin[6*i+3]; g4 = gin[6*i+4]; g5 = gin[6*i+5];
        case (d)
          0: e = $realtobits(g0*a + g1*b + g2*c);
          1: e = $realtobits(g1*a + g3*b + g4*c);
          default: e = $realtobits(g2*a + g4*b + g5*c);
        endcase
        checks++;
        if (w_data[d] !== e) failures++;
        cnt[d]++;
      end
      w_ready[d] <= !stall || ($urandom % 3 != 0);
    end
  end
  // input streams: hold data until taken
  for (genvar d = 0; d < 3; d++) begin : g_src
    int ns = 0;     // points of this stream already taken
    always @(posedge clk) begin
      if (!rst_n) begin
        grad_valid[d] <= 1'b0;
        ns = 0;
      end else begin
        if (grad_valid[d] && grad_ready[d]) ns++;
        if (!(grad_valid[d] && !grad_ready[d])) begin
          grad_valid[d] <= (ns < NE*NPTS) && ($urandom % 4 != 0);
          grad_data[d]  <= $realtobits(gr[d][ns % (NE*NPTS)]);
        end
      end
    end
  end

  initial begin
    foreach (gin[i]) gin[i] = rnd_real();
    for (int d = 0; d < 3; d++) for (int i = 0; i < NE*NPTS; i++) gr[d][i] = rnd_real();
    cnt = '{0, 0, 0};
    rst_n = 0; start = 0; nelt = NE; g_base = 32'h3000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #0.1 start = 1;
    @(posedge clk); #0.1 start = 0;
    while (cnt[0] < NE*NPTS || cnt[1] < NE*NPTS || cnt[2] < NE*NPTS) @(posedge clk);
    checks++;
    repeat (10) @(posedge clk);
    if (busy || |w_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
