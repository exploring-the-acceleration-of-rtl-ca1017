// ax_kernel: one AX kernel, built from three compute units joined by streams.
//
// The kernel applies the Poisson operator to a run of nelt spectral
// elements of N^3 points. Compute unit 1 reads u and computes the gradient
// (ur, us, ut); compute unit 2 reads g and forms the local accumulation
// (wr, ws, wt); compute unit 3 applies the transposed gradient, sums the
// three contributions and writes w. The six links between the units are
// 16-deep streams. All units run at once on different elements: while unit 1
// loads element e+1 into one half of its buffers, it serves element e from
// the other, and unit 3 finishes element e-1 the same way, so in steady
// state every stage handles one grid point per cycle.
//
// Control: start (one-cycle pulse, while idle) latches nelt and the base
// word addresses of u, g, dxm1, dxtm1 and w into all units; done pulses once
// when the last result word is accepted by memory; busy is high in between.
// nelt must be at least 1.
//
// Memory ports (all separate, as every kernel argument has its own HBM
// port): read ports 0 = u, 1 = dxm1 and 2 = dxtm1 of unit 1, 3 = g,
// 4 = dxtm1 and 5 = dxm1 of unit 3; one write port for w.
module ax_kernel
  import nek_pkg::*;
#(
  parameter int unsigned N      = NP,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [31:0]            nelt,
  input  logic [ADDR_W-1:0]      u_base,
  input  logic [ADDR_W-1:0]      g_base,
  input  logic [ADDR_W-1:0]      dxm1_base,
  input  logic [ADDR_W-1:0]      dxtm1_base,
  input  logic [ADDR_W-1:0]      w_base,
  output logic                   busy,
  output logic                   done,
  output logic [5:0]             rd_req_valid,
  input  logic [5:0]             rd_req_ready,
  output logic [5:0][ADDR_W-1:0] rd_req_addr,
  input  logic [5:0]             rd_rsp_valid,
  output logic [5:0]             rd_rsp_ready,
  input  word_t [5:0]            rd_rsp_data,
  output logic                   wr_valid,
  input  logic                   wr_ready,
  output logic [ADDR_W-1:0]      wr_addr,
  output word_t                  wr_data
);
  logic [2:0] g_valid, g_ready, gq_valid, gq_ready;
  logic [2:0] w_valid, w_ready, wq_valid, wq_ready;
  dbl_t [2:0] g_data, gq_data, w_data, wq_data;
  logic cu1_busy, cu2_busy, cu3_done, cu3_mat_busy;

  cu1_grad #(.N(N), .ADDR_W(ADDR_W)) u_cu1 (
    .clk, .rst_n, .start, .nelt, .u_base, .dxm1_base, .dxtm1_base, .busy(cu1_busy),
    .mem_req_valid(rd_req_valid[2:0]), .mem_req_ready(rd_req_ready[2:0]), .mem_req_addr(rd_req_addr[2:0]),
    .mem_rsp_valid(rd_rsp_valid[2:0]), .mem_rsp_ready(rd_rsp_ready[2:0]), .mem_rsp_data(rd_rsp_data[2:0]),
    .grad_valid(g_valid), .grad_ready(g_ready), .grad_data(g_data));

  cu2_accum #(.N(N), .ADDR_W(ADDR_W)) u_cu2 (
    .clk, .rst_n, .start, .nelt, .g_base, .busy(cu2_busy),
    .mem_req_valid(rd_req_valid[3]), .mem_req_ready(rd_req_ready[3]), .mem_req_addr(rd_req_addr[3]),
    .mem_rsp_valid(rd_rsp_valid[3]), .mem_rsp_ready(rd_rsp_ready[3]), .mem_rsp_data(rd_rsp_data[3]),
    .grad_valid(gq_valid), .grad_ready(gq_ready), .grad_data(gq_data),
    .w_valid, .w_ready, .w_data);

  cu3_grad_t #(.N(N), .ADDR_W(ADDR_W)) u_cu3 (
    .clk, .rst_n, .start, .nelt, .dxtm1_base, .dxm1_base, .w_base, .done(cu3_done),
    .mat_busy(cu3_mat_busy),
    .w_valid(wq_valid), .w_ready(wq_ready), .w_data(wq_data),
    .mem_req_valid(rd_req_valid[5:4]), .mem_req_ready(rd_req_ready[5:4]), .mem_req_addr(rd_req_addr[5:4]),
    .mem_rsp_valid(rd_rsp_valid[5:4]), .mem_rsp_ready(rd_rsp_ready[5:4]), .mem_rsp_data(rd_rsp_data[5:4]),
    .mem_wr_valid(wr_valid), .mem_wr_ready(wr_ready), .mem_wr_addr(wr_addr), .mem_wr_data(wr_data));

  // stream links between the compute units
  for (genvar d = 0; d < 3; d++) begin : g_link
    stream_fifo #(.W(64), .DEPTH(16)) u_grad_link (
      .clk, .rst_n,
      .in_valid(g_valid[d]), .in_ready(g_ready[d]), .in_data(g_data[d]),
      .out_valid(gq_valid[d]), .out_ready(gq_ready[d]), .out_data(gq_data[d]));
    stream_fifo #(.W(64), .DEPTH(16)) u_w_link (
      .clk, .rst_n,
      .in_valid(w_valid[d]), .in_ready(w_ready[d]), .in_data(w_data[d]),
      .out_valid(wq_valid[d]), .out_ready(wq_ready[d]), .out_data(wq_data[d]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) busy <= 1'b0;
    else if (start) busy <= 1'b1;
    else if (cu3_done) busy <= 1'b0;
  end
  assign done = cu3_done;

  // the readers must have finished when the last result is written
  a_drained: assert property (@(posedge clk) disable iff (!rst_n)
                              cu3_done |-> !cu1_busy && !cu2_busy && !cu3_mat_busy);
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
