// write_w: the "write w" stage, returning results to HBM.
//
// Results arrive one double per cycle on in_valid/in_ready/in_data in grid
// point order. Eight consecutive results are packed into one 512-bit word
// (first result in bits 63:0) and written to consecutive word addresses from
// base on the write channel (mem_wr_valid/ready/addr/data), which accepts a
// word when valid and ready are both high. A pulse on start latches base and
// the word count; done pulses for one cycle when the last word is accepted.
// A full word waits in an output register while the next eight results are
// gathered, so a ready memory takes one result per cycle without stalling.
// The simple write channel stands in for AXI4 write channels; write responses
// are not modelled.
module write_w
  import nek_pkg::*;
#(
  parameter int unsigned ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       count,
  output logic              done,
  input  logic              in_valid,
  output logic              in_ready,
  input  dbl_t              in_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output word_t             mem_wr_data
);
  dbl_t [LANES-2:0] gather;
  logic [2:0]   lane;
  logic [31:0]  left;
  logic         in_fire, wr_fire;

  assign wr_fire  = mem_wr_valid && mem_wr_ready;
  assign in_ready = !((lane == 3'(LANES-1)) && mem_wr_valid && !mem_wr_ready);
  assign in_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lane         <= '0;
      left         <= '0;
      mem_wr_valid <= 1'b0;
      mem_wr_addr  <= '0;
      mem_wr_data  <= '0;
      gather       <= '0;
      done         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        left        <= count;
        mem_wr_addr <= base;
        lane        <= '0;
      end else begin
        if (wr_fire) begin
          mem_wr_valid <= 1'b0;
          mem_wr_addr  <= mem_wr_addr + 1'b1;
          left         <= left - 1;
          if (left == 32'd1) done <= 1'b1;
        end
        if (in_fire) begin
          if (lane == 3'(LANES-1)) begin
            mem_wr_data  <= {in_data, gather};
            mem_wr_valid <= 1'b1;
            lane         <= '0;
          end else begin
            gather[lane] <= in_data;
            lane         <= lane + 1'b1;
          end
        end
      end
    end
  end

  a_stable: assert property (@(posedge clk) disable iff (!rst_n)
                             mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr_data));
endmodule
