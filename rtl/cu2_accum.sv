// cu2_accum: compute unit 2, reading g and forming the local accumulation.
//
// Joins the ur, us, ut streams from compute unit 1 with the geometric
// factors read from memory (read_g) and produces wr, ws, wt (see
// local_accum). The three results are forked onto three output streams; a
// point leaves only when all three can take it. One memory read port (g).
// A start pulse latches nelt and g_base; busy is high while g is being read.
module cu2_accum
  import nek_pkg::*;
#(
  parameter int unsigned N      = NP,
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [31:0]       nelt,
  input  logic [ADDR_W-1:0] g_base,
  output logic              busy,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  output logic              mem_rsp_ready,
  input  word_t             mem_rsp_data,
  input  logic [2:0]        grad_valid,   // 0 = ur, 1 = us, 2 = ut
  output logic [2:0]        grad_ready,
  input  dbl_t [2:0]        grad_data,
  output logic [2:0]        w_valid,      // 0 = wr, 1 = ws, 2 = wt
  input  logic [2:0]        w_ready,
  output dbl_t [2:0]        w_data
);
  logic       g_valid, g_ready, acc_valid, acc_ready;
  dbl_t [5:0] g;

  read_g #(.N(N), .ADDR_W(ADDR_W)) u_read_g (
    .clk, .rst_n, .start, .base(g_base), .nelt, .busy,
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_data,
    .g_valid, .g_ready, .g_data(g));

  local_accum u_acc (
    .clk, .rst_n,
    .ur_valid(grad_valid[0]), .us_valid(grad_valid[1]), .ut_valid(grad_valid[2]), .g_valid,
    .ur_ready(grad_ready[0]), .us_ready(grad_ready[1]), .ut_ready(grad_ready[2]), .g_ready,
    .ur(grad_data[0]), .us(grad_data[1]), .ut(grad_data[2]), .g,
    .out_valid(acc_valid), .out_ready(acc_ready),
    .wr(w_data[0]), .ws(w_data[1]), .wt(w_data[2]));

  // lock-step fork: the three streams take a point together
  assign acc_ready = &w_ready;
  assign w_valid   = {3{acc_valid && acc_ready}};
endmodule
