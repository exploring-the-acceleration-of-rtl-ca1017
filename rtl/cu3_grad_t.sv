// cu3_grad_t: compute unit 3, the transposed gradient (second half of the
// operator) and the write-back.
//
// For every element it forms
//   w = dxtm1 * wr  +  ws * dxm1  +  wt * dxm1
// where the three products contract along x, y and z respectively. wr, ws
// and wt arrive from compute unit 2 one point per cycle in natural order;
// each goes into its own reorder buffer (one point per beat), which releases
// the element line by line to its matrix multiplication once the element is
// complete, while the next element is already being written into the other
// half. The first add stage sums the wr and ws products, the second adds
// the wt product ((a + b) + c), and "write w" packs eight results per word
// and writes them to memory.
//
// Memory ports: read 0 = dxtm1, read 1 = dxm1 (each read once per run),
// plus the write port for w. Results pass through 16-deep streams between
// the multiplications and the add stages. A start pulse latches nelt and the
// base addresses; done pulses when the last word of w has been accepted.
module cu3_grad_t
  import nek_pkg::*;
#(
  parameter int unsigned N      = NP,
  parameter int unsigned ADDR_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [31:0]            nelt,
  input  logic [ADDR_W-1:0]      dxtm1_base,
  input  logic [ADDR_W-1:0]      dxm1_base,
  input  logic [ADDR_W-1:0]      w_base,
  output logic                   done,
  output logic                   mat_busy,     // matrices still loading
  input  logic [2:0]             w_valid,      // 0 = wr, 1 = ws, 2 = wt
  output logic [2:0]             w_ready,
  input  dbl_t [2:0]             w_data,
  output logic [1:0]             mem_req_valid,
  input  logic [1:0]             mem_req_ready,
  output logic [1:0][ADDR_W-1:0] mem_req_addr,
  input  logic [1:0]             mem_rsp_valid,
  output logic [1:0]             mem_rsp_ready,
  input  word_t [1:0]            mem_rsp_data,
  output logic                   mem_wr_valid,
  input  logic                   mem_wr_ready,
  output logic [ADDR_W-1:0]      mem_wr_addr,
  output word_t                  mem_wr_data
);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned MAT_WORDS = N * N / LANES;

  logic  dt_valid, dt_ready, d_valid, d_ready;
  word_t dt_word, d_word;
  logic  b_dt, b_d;
  logic [2:0] mat_valid, mat_ready;
  word_t [2:0] mat_data;
  logic [2:0] rb_out_valid, rb_out_ready;
  dbl_t [2:0][N-1:0] line;
  logic [2:0][CW-1:0] line_r;
  logic [2:0] mm_valid, mm_ready, q_valid, q_ready;
  dbl_t [2:0] mm_data, q_data;
  logic  s_valid, s_ready, sq_valid, sq_ready, y_valid, y_ready;
  dbl_t  s_data, sq_data, y_data;

  mem_reader #(.ADDR_W(ADDR_W)) u_read_dxtm1 (
    .clk, .rst_n, .start, .base(dxtm1_base), .count(32'(MAT_WORDS)), .busy(b_dt),
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]), .mem_req_addr(mem_req_addr[0]),
    .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp_ready(mem_rsp_ready[0]), .mem_rsp_data(mem_rsp_data[0]),
    .out_valid(dt_valid), .out_ready(dt_ready), .out_data(dt_word));
  mem_reader #(.ADDR_W(ADDR_W)) u_read_dxm1 (
    .clk, .rst_n, .start, .base(dxm1_base), .count(32'(MAT_WORDS)), .busy(b_d),
    .mem_req_valid(mem_req_valid[1]), .mem_req_ready(mem_req_ready[1]), .mem_req_addr(mem_req_addr[1]),
    .mem_rsp_valid(mem_rsp_valid[1]), .mem_rsp_ready(mem_rsp_ready[1]), .mem_rsp_data(mem_rsp_data[1]),
    .out_valid(d_valid), .out_ready(d_ready), .out_data(d_word));

  assign mat_busy = b_dt || b_d;

  // dxtm1 -> wr multiplication; dxm1 -> ws and wt multiplications together
  assign mat_valid = {d_valid && mat_ready[1], d_valid && mat_ready[2], dt_valid};
  assign mat_data  = {d_word, d_word, dt_word};
  assign dt_ready  = mat_ready[0];
  assign d_ready   = mat_ready[1] && mat_ready[2];

  for (genvar d = 0; d < 3; d++) begin : g_dir
    reorder_buffer #(.N(N), .WR_LANES(1), .DIR(d)) u_rb (
      .clk, .rst_n,
      .in_valid(w_valid[d]), .in_ready(w_ready[d]), .in_data(w_data[d]),
      .out_valid(rb_out_valid[d]), .out_ready(rb_out_ready[d]),
      .out_line(line[d]), .out_r(line_r[d]));
    mxm_unit #(.N(N), .LEFT(d == 0)) u_mxm (
      .clk, .rst_n, .start,
      .mat_valid(mat_valid[d]), .mat_ready(mat_ready[d]), .mat_data(mat_data[d]),
      .in_valid(rb_out_valid[d]), .in_ready(rb_out_ready[d]), .in_line(line[d]), .in_r(line_r[d]),
      .out_valid(mm_valid[d]), .out_ready(mm_ready[d]), .out_data(mm_data[d]));
    stream_fifo #(.W(64), .DEPTH(16)) u_q (
      .clk, .rst_n,
      .in_valid(mm_valid[d]), .in_ready(mm_ready[d]), .in_data(mm_data[d]),
      .out_valid(q_valid[d]), .out_ready(q_ready[d]), .out_data(q_data[d]));
  end

  add_stage u_add_rs (
    .clk, .rst_n,
    .a_valid(q_valid[0]), .b_valid(q_valid[1]), .a_ready(q_ready[0]), .b_ready(q_ready[1]),
    .a(q_data[0]), .b(q_data[1]),
    .y_valid(s_valid), .y_ready(s_ready), .y(s_data));
  stream_fifo #(.W(64), .DEPTH(16)) u_q_s (
    .clk, .rst_n,
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data),
    .out_valid(sq_valid), .out_ready(sq_ready), .out_data(sq_data));
  add_stage u_add_t (
    .clk, .rst_n,
    .a_valid(sq_valid), .b_valid(q_valid[2]), .a_ready(sq_ready), .b_ready(q_ready[2]),
    .a(sq_data), .b(q_data[2]),
    .y_valid(y_valid), .y_ready(y_ready), .y(y_data));

  write_w #(.ADDR_W(ADDR_W)) u_write_w (
    .clk, .rst_n, .start, .base(w_base), .count(nelt * (N*N*N/LANES)), .done,
    .in_valid(y_valid), .in_ready(y_ready), .in_data(y_data),
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data);
endmodule
