// fp64_mul: IEEE-754 binary64 multiplier core with one register stage.
//
// y holds the rounded product of the a and b presented at the previous rising
// edge on which en was high; with en low the register keeps its value, which
// lets a stalled pipeline freeze. Rounding is to nearest even; subnormal
// operands and results are flushed to zero and NaN results are the canonical
// quiet NaN. The arithmetic is the shared function fp64_mul_f of nek_pkg.
// The original kernel used the synthesis tool's double-precision cores; their
// latency (part of a 45-61 cycle matrix-multiplication pipeline) is not
// reproduced, a single stage is this design's choice.
module fp64_mul
  import nek_pkg::*;
(
  input  logic clk,
  input  logic en,
  input  dbl_t a,
  input  dbl_t b,
  output dbl_t y
);
  always_ff @(posedge clk) begin
    if (en) y <= fp64_mul_f(a, b);
  end
endmodule
