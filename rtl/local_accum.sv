// local_accum: the "local accumulation of values" stage (CU 2).
//
// For each grid point the three directional derivatives ur, us, ut are
// combined with the point's six geometric factors g1..g6:
//   wr = g1*ur + g2*us + g3*ut
//   ws = g2*ur + g4*us + g5*ut
//   wt = g3*ur + g5*us + g6*ut
// i.e. 9 multiplies and 6 additions per point, sums taken left to right
// ((a + b) + c), as the original loop writes them.
//
// Four input streams (ur, us, ut and the g record) are joined: a point
// enters when all four are valid. The result leaves as one beat carrying
// wr, ws and wt on out_valid/out_ready. Three register stages (multiply,
// first add, second add) give a latency of 3 cycles and one point per cycle;
// the pipeline freezes while out_valid is high and out_ready low.
module local_accum
  import nek_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ur_valid, us_valid, ut_valid, g_valid,
  output logic       ur_ready, us_ready, ut_ready, g_ready,
  input  dbl_t       ur, us, ut,
  input  dbl_t [5:0] g,
  output logic       out_valid,
  input  logic       out_ready,
  output dbl_t       wr, ws, wt
);
  logic adv, fire;
  logic [2:0] vld;
  dbl_t p [9];        // products, 3 per output
  dbl_t s [3];        // first partial sums
  dbl_t c [3];        // third product carried one stage

  // g index (0-based) of each product: row o, column d
  localparam int unsigned GI [9] = '{0, 1, 2,  1, 3, 4,  2, 4, 5};

  assign adv  = !out_valid || out_ready;
  assign fire = ur_valid && us_valid && ut_valid && g_valid && adv;
  assign ur_ready = fire;
  assign us_ready = fire;
  assign ut_ready = fire;
  assign g_ready  = fire;

  for (genvar o = 0; o < 3; o++) begin : g_out
    fp64_mul u_m0 (.clk, .en(adv), .a(g[GI[3*o+0]]), .b(ur), .y(p[3*o+0]));
    fp64_mul u_m1 (.clk, .en(adv), .a(g[GI[3*o+1]]), .b(us), .y(p[3*o+1]));
    fp64_mul u_m2 (.clk, .en(adv), .a(g[GI[3*o+2]]), .b(ut), .y(p[3*o+2]));
    fp64_add u_a0 (.clk, .en(adv), .a(p[3*o+0]), .b(p[3*o+1]), .y(s[o]));
    always_ff @(posedge clk) if (adv) c[o] <= p[3*o+2];
  end
  fp64_add u_a1r (.clk, .en(adv), .a(s[0]), .b(c[0]), .y(wr));
  fp64_add u_a1s (.clk, .en(adv), .a(s[1]), .b(c[1]), .y(ws));
  fp64_add u_a1t (.clk, .en(adv), .a(s[2]), .b(c[2]), .y(wt));

  always_ff @(posedge clk) begin
    if (!rst_n) vld <= '0;
    else if (adv) vld <= {vld[1:0], fire};
  end
  assign out_valid = vld[2];
endmodule
