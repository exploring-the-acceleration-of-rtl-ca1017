// cu1_grad: compute unit 1, the local gradient (first half of the operator).
//
// For every element it computes the derivatives of u along x, y and z:
//   ur = dxm1 * u      (contract along x, matrix applied from the left)
//   us = u * dxtm1     (contract along y, per z-plane)
//   ut = u * dxtm1     (contract along z)
// Stages: "read u" streams the element's N^3 values, eight per 512-bit word,
// and broadcasts each word to three reorder buffers (a word moves only when
// all three can take it). Each buffer serves its multiplication one line per
// output point, so the three results leave in natural point order, one point
// per cycle each, on the ur/us/ut streams. dxm1 and dxtm1 are read once per
// run through ports of their own; dxtm1 feeds both us and ut multiplications.
//
// Memory ports are indexed 0 = u, 1 = dxm1, 2 = dxtm1 (request/response
// channels, see mem_reader). A start pulse latches nelt and the base word
// addresses; busy stays high until the last u word and both matrices have been taken.
// The first element's output starts after its N^3/8 words are buffered;
// later elements are read while the previous one is being served.
module cu1_grad
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
  input  logic [ADDR_W-1:0]      dxm1_base,
  input  logic [ADDR_W-1:0]      dxtm1_base,
  output logic                   busy,
  output logic [2:0]             mem_req_valid,
  input  logic [2:0]             mem_req_ready,
  output logic [2:0][ADDR_W-1:0] mem_req_addr,
  input  logic [2:0]             mem_rsp_valid,
  output logic [2:0]             mem_rsp_ready,
  input  word_t [2:0]            mem_rsp_data,
  output logic [2:0]             grad_valid,    // 0 = ur, 1 = us, 2 = ut
  input  logic [2:0]             grad_ready,
  output dbl_t [2:0]             grad_data
);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned MAT_WORDS = N * N / LANES;

  logic  u_valid, u_ready, d_valid, d_ready, dt_valid, dt_ready;
  word_t u_word, d_word, dt_word;
  logic  b_u, b_d, b_dt;
  logic [2:0] rb_in_ready, rb_out_valid, rb_out_ready;
  logic [2:0] mat_valid, mat_ready;
  word_t [2:0] mat_data;
  dbl_t [2:0][N-1:0] line;
  logic [2:0][CW-1:0] line_r;

  mem_reader #(.ADDR_W(ADDR_W)) u_read_u (
    .clk, .rst_n, .start, .base(u_base), .count(nelt * (N*N*N/LANES)), .busy(b_u),
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]), .mem_req_addr(mem_req_addr[0]),
    .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp_ready(mem_rsp_ready[0]), .mem_rsp_data(mem_rsp_data[0]),
    .out_valid(u_valid), .out_ready(u_ready), .out_data(u_word));
  mem_reader #(.ADDR_W(ADDR_W)) u_read_dxm1 (
    .clk, .rst_n, .start, .base(dxm1_base), .count(32'(MAT_WORDS)), .busy(b_d),
    .mem_req_valid(mem_req_valid[1]), .mem_req_ready(mem_req_ready[1]), .mem_req_addr(mem_req_addr[1]),
    .mem_rsp_valid(mem_rsp_valid[1]), .mem_rsp_ready(mem_rsp_ready[1]), .mem_rsp_data(mem_rsp_data[1]),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_word));
  mem_reader #(.ADDR_W(ADDR_W)) u_read_dxtm1 (
    .clk, .rst_n, .start, .base(dxtm1_base), .count(32'(MAT_WORDS)), .busy(b_dt),
    .mem_req_valid(mem_req_valid[2]), .mem_req_ready(mem_req_ready[2]), .mem_req_addr(mem_req_addr[2]),
    .mem_rsp_valid(mem_rsp_valid[2]), .mem_rsp_ready(mem_rsp_ready[2]), .mem_rsp_data(mem_rsp_data[2]),
    .out_valid(dt_valid), .out_ready(dt_ready), .out_data(dt_word));

  assign busy = b_u || b_d || b_dt;

  // u broadcast: all three buffers take a word together
  assign u_ready = &rb_in_ready;

  // dxm1 -> ur multiplication; dxtm1 -> us and ut multiplications together
  assign mat_valid = {dt_valid && mat_ready[1], dt_valid && mat_ready[2], d_valid};
  assign mat_data  = {dt_word, dt_word, d_word};
  assign d_ready   = mat_ready[0];
  assign dt_ready  = mat_ready[1] && mat_ready[2];

  for (genvar d = 0; d < 3; d++) begin : g_dir
    reorder_buffer #(.N(N), .WR_LANES(LANES), .DIR(d)) u_rb (
      .clk, .rst_n,
      .in_valid(u_valid && u_ready), .in_ready(rb_in_ready[d]), .in_data(u_word),
      .out_valid(rb_out_valid[d]), .out_ready(rb_out_ready[d]),
      .out_line(line[d]), .out_r(line_r[d]));
    mxm_unit #(.N(N), .LEFT(d == 0)) u_mxm (
      .clk, .rst_n, .start,
      .mat_valid(mat_valid[d]), .mat_ready(mat_ready[d]), .mat_data(mat_data[d]),
      .in_valid(rb_out_valid[d]), .in_ready(rb_out_ready[d]), .in_line(line[d]), .in_r(line_r[d]),
      .out_valid(grad_valid[d]), .out_ready(grad_ready[d]), .out_data(grad_data[d]));
  end
endmodule
