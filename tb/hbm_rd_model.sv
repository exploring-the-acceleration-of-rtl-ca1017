// hbm_rd_model: behavioural model of one HBM read port, for testbenches.
//
// Accepts word-address requests (req_valid/req_ready/req_addr) and returns
// the words in order on rsp_valid/rsp_ready/rsp_data after at least LAT
// cycles. The stored data live in the testbench: lookup_addr repeats the
// request address and the model captures lookup_data, which the testbench
// drives from its store, when it accepts the request. With stall high, ready and
// response timing are randomised. Not synthesizable (queues, $urandom).
module hbm_rd_model #(
  parameter int unsigned AW  = 32,
  parameter int unsigned LAT = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [AW-1:0] req_addr,
  output logic          rsp_valid,
  input  logic          rsp_ready,
  output logic [511:0]  rsp_data,
  output logic [AW-1:0] lookup_addr,
  input  logic [511:0]  lookup_data
);
  logic [511:0]  q_data [$];
  longint        q_due [$];
  longint        cycle = 0;
  assign lookup_addr = req_addr;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      req_ready <= 1'b0;
      rsp_data  <= '0;
      q_data.delete(); q_due.delete();
    end else begin
      if (rsp_valid && rsp_ready) begin
        void'(q_data.pop_front()); void'(q_due.pop_front());
      end
      if (req_valid && req_ready) begin
        q_data.push_back(lookup_data);
        q_due.push_back(cycle + LAT + (stall ? longint'($urandom % 8) : 0));
      end
      req_ready <= stall ? ($urandom % 4 != 0) : 1'b1;
      rsp_valid <= 1'b0;
      if (q_data.size() > 0 && q_due[0] <= cycle && (!stall || $urandom % 3 != 0)) begin
        rsp_valid <= 1'b1;
        rsp_data  <= q_data[0];
      end
    end
  end
endmodule
