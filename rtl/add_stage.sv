// add_stage: one of the two "add" stages at the end of the kernel.
//
// The second half of the operator sums three matrix-multiplication results
// per grid point; each add stage adds two streams point by point
// (y = a + b, binary64). The two inputs are joined (a point enters when both
// are valid), one register stage gives a latency of 1 cycle and one result
// per cycle, and the stage freezes while y_valid is high and y_ready low.
module add_stage
  import nek_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic a_valid, b_valid,
  output logic a_ready, b_ready,
  input  dbl_t a, b,
  output logic y_valid,
  input  logic y_ready,
  output dbl_t y
);
  logic adv, fire;
  assign adv     = !y_valid || y_ready;
  assign fire    = a_valid && b_valid && adv;
  assign a_ready = fire;
  assign b_ready = fire;
  fp64_add u_add (.clk, .en(adv), .a, .b, .y);
  always_ff @(posedge clk) begin
    if (!rst_n) y_valid <= 1'b0;
    else if (adv) y_valid <= fire;
  end
endmodule
