// read_g: the "read g" stage, delivering the six geometric factors of one
// grid point per cycle.
//
// The array g holds, for each grid point in natural order, six doubles
// (g1..g6, the symmetric 3x3 metric tensor used by the local accumulation).
// They are read contiguously through a 512-bit port, so four points arrive
// in three words. A 14-entry regrouping register takes a word of eight
// doubles whenever it will have room and releases six at a time on
// g_valid/g_ready, lowest address first in g_data[0]. start latches base and
// the element count nelt; the stage reads 6*N^3/8 words per element.
// The packing of g and the regrouping logic are this design's choices; the
// source only says that g is an input read from HBM.
module read_g
  import nek_pkg::*;
#(
  parameter int unsigned N      = NP,
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       nelt,
  output logic              busy,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  output logic              mem_rsp_ready,
  input  word_t             mem_rsp_data,
  output logic              g_valid,
  input  logic              g_ready,
  output dbl_t [5:0]        g_data
);
  localparam int unsigned WORDS_PER_ELEM = 6 * N * N * N / LANES;
  logic  w_valid, w_ready, rd_busy;
  word_t w_data;
  dbl_t  buf_q [14];
  logic [3:0] cnt;       // doubles held
  logic  pop, push;
  logic [3:0] cnt_after_pop;

  mem_reader #(.ADDR_W(ADDR_W)) u_rd (
    .clk, .rst_n, .start, .base, .count(nelt * WORDS_PER_ELEM), .busy(rd_busy),
    .mem_req_valid, .mem_req_ready, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_data,
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  assign g_valid       = (cnt >= 4'd6);
  assign pop           = g_valid && g_ready;
  assign cnt_after_pop = pop ? cnt - 4'd6 : cnt;
  assign w_ready       = (cnt_after_pop <= 4'd6);
  assign push          = w_valid && w_ready;
  assign busy          = rd_busy || (cnt != 0);

  always_comb begin
    for (int i = 0; i < 6; i++) g_data[i] = buf_q[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < 14; i++) buf_q[i] <= '0;
    end else begin
      for (int i = 0; i < 14; i++) begin
        logic [4:0] src;
        src = pop ? 5'(i + 6) : 5'(i);
        if (src < 5'd14) buf_q[i] <= buf_q[src[3:0]];
        if (push && (5'(i) >= 5'(cnt_after_pop)) && (5'(i) < 5'(cnt_after_pop) + 5'd8))
          buf_q[i] <= w_data[64*(i - int'(cnt_after_pop)) +: 64];
      end
      cnt <= cnt_after_pop + (push ? 4'd8 : 4'd0);
    end
  end
endmodule
