// mem_reader: streams a contiguous block of 512-bit words from one HBM port.
//
// Reading external data is a dataflow stage of its own in the kernel; each
// array has a port of its own, 512 bits wide so one access brings eight
// doubles. A pulse on start latches base (word address) and count (number of
// words). The reader then issues one request per word on the request channel
// (mem_req_valid/ready/addr) and takes responses, which the memory returns in
// order, on the response channel (mem_rsp_valid/ready/data). Responses land in
// a MAX_OUT-deep queue that feeds out_valid/out_ready/out_data; requests stop
// while MAX_OUT words are requested but not yet passed on, so the queue never
// overflows and mem_rsp_ready is high whenever a response can be due. busy is
// high from start until the last word has left on the output stream.
// The request/response channel pair stands in for the AXI4 read channels of
// the original; burst lengths and IDs are not modelled.
module mem_reader
  import nek_pkg::*;
#(
  parameter int unsigned ADDR_W  = 32,
  parameter int unsigned MAX_OUT = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       count,
  output logic              busy,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [ADDR_W-1:0] mem_req_addr,
  input  logic              mem_rsp_valid,
  output logic              mem_rsp_ready,
  input  word_t             mem_rsp_data,
  output logic              out_valid,
  input  logic              out_ready,
  output word_t             out_data
);
  localparam int unsigned CW = $clog2(MAX_OUT + 1);
  logic [31:0]       req_left, out_left;
  logic [CW-1:0]     in_flight;   // requested, not yet passed to the output
  logic              req_fire, out_fire, q_ready;

  assign mem_req_valid = (req_left != 0) && (in_flight != CW'(MAX_OUT));
  assign req_fire      = mem_req_valid && mem_req_ready;
  assign out_fire      = out_valid && out_ready;
  assign busy          = (out_left != 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_left     <= '0;
      out_left     <= '0;
      in_flight    <= '0;
      mem_req_addr <= '0;
    end else begin
      if (start) begin
        req_left     <= count;
        out_left     <= count;
        mem_req_addr <= base;
      end else begin
        if (req_fire) begin
          req_left     <= req_left - 1;
          mem_req_addr <= mem_req_addr + 1'b1;
        end
        if (out_fire) out_left <= out_left - 1;
      end
      in_flight <= in_flight + CW'(req_fire) - CW'(out_fire);
    end
  end

  stream_fifo #(.W(WORD_W), .DEPTH(MAX_OUT)) u_rsp_q (
    .clk, .rst_n,
    .in_valid (mem_rsp_valid), .in_ready (q_ready), .in_data (mem_rsp_data),
    .out_valid, .out_ready, .out_data
  );
  assign mem_rsp_ready = q_ready;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  mem_rsp_valid |-> q_ready);
endmodule
