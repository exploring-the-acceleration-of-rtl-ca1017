// nekbone_ax_top: the accelerator, NUM_KERNELS independent AX kernels.
//
// Elements of the spectral-element mesh are independent, so a job of nelt
// elements is cut into contiguous runs, one per kernel: each kernel gets
// ceil(nelt / NUM_KERNELS) elements (the last ones may get fewer or none).
// Kernel k starts at element first_k = k * ceil(nelt / NUM_KERNELS) and its
// u, g and w base addresses are offset by first_k times the element's size
// in words (N^3/8 for u and w, 6*N^3/8 for g); all kernels read the same
// dxm1 and dxtm1. Every kernel has its own seven memory ports (six read, one
// write), which in the original system go to separate HBM banks so the
// kernels never contend; here they are brought out as arrays indexed by
// kernel, then by read port (0 = u, 1 = dxm1, 2 = dxtm1, 3 = g, 4 = dxtm1,
// 5 = dxm1). Memory addresses are in 512-bit words.
//
// Control: a one-cycle start pulse while idle launches all kernels that
// have elements; done pulses once when every launched kernel has finished;
// busy is high in between. nelt = 0 finishes at once.
module nekbone_ax_top
  import nek_pkg::*;
#(
  parameter int unsigned N           = NP,
  parameter int unsigned NUM_KERNELS = 4,
  parameter int unsigned ADDR_W      = 32
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     start,
  input  logic [31:0]                              nelt,
  input  logic [ADDR_W-1:0]                        u_base,
  input  logic [ADDR_W-1:0]                        g_base,
  input  logic [ADDR_W-1:0]                        dxm1_base,
  input  logic [ADDR_W-1:0]                        dxtm1_base,
  input  logic [ADDR_W-1:0]                        w_base,
  output logic                                     busy,
  output logic                                     done,
  output logic [NUM_KERNELS-1:0][5:0]              rd_req_valid,
  input  logic [NUM_KERNELS-1:0][5:0]              rd_req_ready,
  output logic [NUM_KERNELS-1:0][5:0][ADDR_W-1:0]  rd_req_addr,
  input  logic [NUM_KERNELS-1:0][5:0]              rd_rsp_valid,
  output logic [NUM_KERNELS-1:0][5:0]              rd_rsp_ready,
  input  word_t [NUM_KERNELS-1:0][5:0]             rd_rsp_data,
  output logic [NUM_KERNELS-1:0]                   wr_valid,
  input  logic [NUM_KERNELS-1:0]                   wr_ready,
  output logic [NUM_KERNELS-1:0][ADDR_W-1:0]       wr_addr,
  output word_t [NUM_KERNELS-1:0]                  wr_data
);
  localparam int unsigned UW = N * N * N / LANES;   // words per element of u or w
  localparam int unsigned GW = 6 * UW;              // words per element of g

  logic [31:0] per;
  logic [NUM_KERNELS-1:0] k_start, k_done, k_busy, pending;
  logic [NUM_KERNELS-1:0][31:0] k_nelt;
  logic [NUM_KERNELS-1:0][31:0] k_first;

  assign per = (nelt + NUM_KERNELS - 1) / NUM_KERNELS;

  for (genvar k = 0; k < NUM_KERNELS; k++) begin : g_k
    always_comb begin
      k_first[k] = per * k;
      if (nelt > k_first[k]) k_nelt[k] = (nelt - k_first[k] < per) ? nelt - k_first[k] : per;
      else k_nelt[k] = '0;
    end
    assign k_start[k] = start && !busy && (k_nelt[k] != 0);

    ax_kernel #(.N(N), .ADDR_W(ADDR_W)) u_kernel (
      .clk, .rst_n, .start(k_start[k]), .nelt(k_nelt[k]),
      .u_base(u_base + ADDR_W'(k_first[k] * UW)),
      .g_base(g_base + ADDR_W'(k_first[k] * GW)),
      .dxm1_base, .dxtm1_base,
      .w_base(w_base + ADDR_W'(k_first[k] * UW)),
      .busy(k_busy[k]), .done(k_done[k]),
      .rd_req_valid(rd_req_valid[k]), .rd_req_ready(rd_req_ready[k]), .rd_req_addr(rd_req_addr[k]),
      .rd_rsp_valid(rd_rsp_valid[k]), .rd_rsp_ready(rd_rsp_ready[k]), .rd_rsp_data(rd_rsp_data[k]),
      .wr_valid(wr_valid[k]), .wr_ready(wr_ready[k]), .wr_addr(wr_addr[k]), .wr_data(wr_data[k]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      pending <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        pending <= k_start;
        busy    <= 1'b1;
      end else if (busy) begin
        pending <= pending & ~k_done;
        if ((pending & ~k_done) == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_done_from_busy: assert property (@(posedge clk) disable iff (!rst_n) (|k_done) |-> (k_done & ~k_busy) == '0);
endmodule
