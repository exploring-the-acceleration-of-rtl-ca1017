// tb_nekbone_ax_full: end-to-end test of the accelerator at its default
// size: four kernels, polynomial order 16 (4096 points per element), every
// parameter of the top left at its default. A job of 12 elements (3 per
// kernel) runs first against a memory that stalls at random, then against
// an always-ready memory for the throughput check. See ax_top_tb_body.svh.
module tb_nekbone_ax_full;
  localparam int unsigned N        = 16;
  localparam int unsigned NK       = 4;
  localparam int unsigned NELT     = 12;
  localparam bit          STALLS   = 1'b1;
  localparam longint      WATCHDOG = 400000;
  `define KPATH(k) dut.g_k[k].u_kernel
  `define KBUSY dut.k_busy
  `include "ax_top_tb_body.svh"
  nekbone_ax_top dut (.*);
endmodule
