// tb_nekbone_ax_top: end-to-end test of the accelerator at reduced size.
// Four kernels with polynomial order 8 process a job of 14 elements
// (4, 4, 4 and 2 per kernel), first with a memory that stalls at random,
// then with an always-ready memory for the throughput check. See
// ax_top_tb_body.svh for the checks.
module tb_nekbone_ax_top;
  localparam int unsigned N        = 8;
  localparam int unsigned NK       = 4;
  localparam int unsigned NELT     = 14;
  localparam bit          STALLS   = 1'b1;
  localparam longint      WATCHDOG = 400000;
  `define KPATH(k) dut.g_k[k].u_kernel
  `define KBUSY dut.k_busy
  `include "ax_top_tb_body.svh"
  nekbone_ax_top #(.N(N), .NUM_KERNELS(NK)) dut (.*);
endmodule
