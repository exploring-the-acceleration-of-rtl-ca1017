// tb_ax_kernel: end-to-end test of a single AX kernel (polynomial order 8,
// five elements) against a stalling memory and then an always-ready one;
// results are checked bit for bit, the run time against one point per
// cycle, and each mechanism (ping-pong overlap, three elements in flight,
// memory and write stalls, full buffers, g regrouping) must occur.
module tb_ax_kernel;
  localparam int unsigned N        = 8;
  localparam int unsigned NK       = 1;
  localparam int unsigned NELT     = 5;
  localparam bit          STALLS   = 1'b1;
  localparam longint      WATCHDOG = 400000;
  `define KPATH(k) dut
  `define KBUSY busy
  `include "ax_top_tb_body.svh"
  ax_kernel #(.N(N)) dut (
    .clk, .rst_n, .start, .nelt, .u_base, .g_base, .dxm1_base, .dxtm1_base, .w_base,
    .busy, .done,
    .rd_req_valid(rd_req_valid[0]), .rd_req_ready(rd_req_ready[0]), .rd_req_addr(rd_req_addr[0]),
    .rd_rsp_valid(rd_rsp_valid[0]), .rd_rsp_ready(rd_rsp_ready[0]), .rd_rsp_data(rd_rsp_data[0]),
    .wr_valid(wr_valid[0]), .wr_ready(wr_ready[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0]));
endmodule
