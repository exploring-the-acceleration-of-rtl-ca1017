// mxm_unit: one small matrix multiplication of the AX kernel.
//
// The operator applies an N x N matrix M (dxm1 or its transpose dxtm1) along
// one direction of every element. For each output point the unit takes the
// N input values along that direction (one line from its reorder buffer) and
// forms the dot product with one row or column of M: N multiplies followed by
// a balanced tree of N-1 additions, i.e. 2N-1 = 31 operations per cycle at
// N = 16, one result per cycle once the pipeline is full.
//
// LEFT = 1 computes C = M * X (coefficient M(r,l), as in ur = dxm1 * u);
// LEFT = 0 computes C = X * M (coefficient M(l,r), as in us = u * dxtm1),
// where r = in_r is the output point's coordinate along the contracted
// direction and l runs over the line.
//
// The matrix arrives on mat_valid/mat_ready as N*N/8 words of eight doubles
// in column-major order (M(r,c) at index r + N*c) and is kept for the whole
// run; start clears it so the next run loads a new one. Lines are accepted on
// in_valid/in_ready only after the matrix is loaded. Latency is 1 + log2(N)
// cycles (a multiply stage, then one stage per adder-tree level); the whole
// pipeline freezes while out_valid is high and out_ready low.
// The unrolled dot product and the one-line-per-output schedule follow the
// source's final matrix multiplication; the pairwise summation order and the
// short pipeline are this design's choices.
module mxm_unit
  import nek_pkg::*;
#(
  parameter int unsigned N    = NP,
  parameter bit          LEFT = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 mat_valid,
  output logic                 mat_ready,
  input  word_t                mat_data,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  dbl_t [N-1:0]         in_line,
  input  logic [$clog2(N)-1:0] in_r,
  output logic                 out_valid,
  input  logic                 out_ready,
  output dbl_t                 out_data
);
  localparam int unsigned L  = $clog2(N);          // adder-tree levels
  localparam int unsigned MW = N * N / LANES;      // matrix words
  localparam int unsigned IW = (MW > 1) ? $clog2(MW) : 1;

  dbl_t          coef [N*N];
  logic          loaded;
  logic [IW-1:0] widx;
  logic          adv;
  logic [L:0]    vld;                              // valid of each stage output

  assign mat_ready = !loaded;
  assign adv       = !out_valid || out_ready;
  assign in_ready  = loaded && adv;

  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      loaded <= 1'b0;
      widx   <= '0;
    end else if (mat_valid && mat_ready) begin
      for (int q = 0; q < LANES; q++) coef[int'(widx) * LANES + q] <= mat_data[64*q +: 64];
      widx <= widx + 1'b1;
      if (widx == IW'(MW-1)) loaded <= 1'b1;
    end
  end

  // Tree nodes, level by level: level k (k = 0 products) starts at
  // index 2N - (2N >> k) and has N >> k nodes; the root is node 2N-2.
  dbl_t node [2*N-1];
  function automatic int unsigned off(input int unsigned k);
    return 2*N - ((2*N) >> k);
  endfunction

  // stage 0: products
  for (genvar l = 0; l < N; l++) begin : g_mul
    dbl_t c;
    assign c = LEFT ? coef[int'(in_r) + N*l] : coef[l + N*int'(in_r)];
    fp64_mul u_mul (.clk, .en(adv), .a(c), .b(in_line[l]), .y(node[l]));
  end

  // adder-tree levels
  for (genvar k = 0; k < L; k++) begin : g_lvl
    for (genvar i = 0; i < (N >> (k+1)); i++) begin : g_add
      fp64_add u_add (.clk, .en(adv), .a(node[off(k)+2*i]), .b(node[off(k)+2*i+1]), .y(node[off(k+1)+i]));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (adv) vld <= {vld[L-1:0], in_valid && in_ready};
  end

  assign out_valid = vld[L];
  assign out_data  = node[2*N-2];

  initial assert (2**L == N) else $error("N must be a power of two");
endmodule
