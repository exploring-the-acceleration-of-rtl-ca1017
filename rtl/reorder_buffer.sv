// reorder_buffer: ping-pong buffer that turns a stream of grid points in
// natural order into the lines a matrix multiplication consumes.
//
// Each matrix multiplication contracts along one direction (DIR 0 = x,
// 1 = y, 2 = z), so for every output point it needs the N values of its
// input along that direction, while the input arrives in natural order
// (x fastest). The buffer holds two whole elements: one half is filled with
// element e+1 while the other serves element e, and the halves swap when
// both are done, so reading contiguously and serving out of order overlap.
//
// Storage is N banks of 2*N*N doubles. Point (x,y,z) lives in bank
// (x+y+z) mod N at address z*N+y of its half; any line along x, y or z then
// touches every bank once, so one whole line is read in a single cycle.
//
// Write side: in_valid/in_ready with WR_LANES consecutive points per beat
// (8 for the 512-bit u port, 1 when fed by the local accumulation). in_ready
// is low while both halves hold unserved elements.
// Read side: out_valid/out_ready; each beat is the output point's line
// out_line[0..N-1] and out_r, the coordinate of the output point along DIR.
// Output points come in natural order; the banks are read at the rising edge
// on which the beat is issued (registered, one cycle of latency). An element
// is served only once it has been completely written.
// The bank layout and handshakes are this design's own; the source gives the
// buffer's role and its ping-pong organisation.
module reorder_buffer
  import nek_pkg::*;
#(
  parameter int unsigned N        = NP,
  parameter int unsigned WR_LANES = 8,
  parameter int unsigned DIR      = 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  dbl_t [WR_LANES-1:0]    in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output dbl_t [N-1:0]           out_line,
  output logic [$clog2(N)-1:0]   out_r
);
  localparam int unsigned CW = $clog2(N);
  localparam int unsigned AW = $clog2(2 * N * N);

  // ping-pong state
  logic [1:0] full;
  logic       wsel, rsel;
  // write position (x is the first lane of the beat)
  logic [CW-1:0] wx, wy, wz;
  // read position
  logic [CW-1:0] rx, ry, rz;
  logic          in_fire, adv, rd_fire;
  logic          w_last, r_last;

  // banked storage
  dbl_t          bank_rd [N];
  logic [CW-1:0] rot_q;           // (sum of the two fixed coordinates) mod N, for the rotation

  assign in_ready = !full[wsel];
  assign in_fire  = in_valid && in_ready;
  assign adv      = !out_valid || out_ready;
  assign rd_fire  = adv && full[rsel];
  assign w_last   = (32'(wx) + WR_LANES >= N) && (wy == CW'(N-1)) && (wz == CW'(N-1));
  assign r_last   = (rx == CW'(N-1)) && (ry == CW'(N-1)) && (rz == CW'(N-1));

  function automatic logic [CW-1:0] modn(input int unsigned v);
    return CW'(v % N);
  endfunction

  for (genvar b = 0; b < N; b++) begin : g_bank
    dbl_t          mem [2*N*N];
    logic          we;
    dbl_t          wdata;
    logic [AW-1:0] waddr, raddr;
    logic [CW-1:0] rl;

    // which lane of the current beat falls into this bank
    always_comb begin
      int unsigned lane;
      lane  = (b + 2*N - int'(wy) - int'(wz) + N - int'(wx)) % N;
      we    = in_fire && (lane < WR_LANES);
      wdata = in_data[lane % WR_LANES];
      waddr = AW'({wsel, wz, wy});
    end

    // which point of the requested line this bank holds
    always_comb begin
      case (DIR)
        0: begin rl = modn(b + 2*N - int'(ry) - int'(rz)); raddr = AW'({rsel, rz, ry}); end
        1: begin rl = modn(b + 2*N - int'(rx) - int'(rz)); raddr = AW'({rsel, rz, rl}); end
        default: begin rl = modn(b + 2*N - int'(rx) - int'(ry)); raddr = AW'({rsel, rl, ry}); end
      endcase
    end

    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      if (rd_fire) bank_rd[b] <= mem[raddr];
    end
  end

  // element l of the line sits in bank (l + rot) mod N
  always_comb begin
    for (int l = 0; l < N; l++) out_line[l] = bank_rd[(l + int'(rot_q)) % N];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full      <= '0;
      wsel      <= 1'b0;
      rsel      <= 1'b0;
      {wx, wy, wz} <= '0;
      {rx, ry, rz} <= '0;
      out_valid <= 1'b0;
      out_r     <= '0;
      rot_q     <= '0;
    end else begin
      if (in_fire) begin
        if (32'(wx) + WR_LANES >= N) begin
          wx <= '0;
          if (wy == CW'(N-1)) begin
            wy <= '0;
            wz <= (wz == CW'(N-1)) ? '0 : wz + 1'b1;
          end else wy <= wy + 1'b1;
        end else wx <= wx + CW'(WR_LANES);
        if (w_last) begin
          full[wsel] <= 1'b1;
          wsel       <= ~wsel;
        end
      end
      if (adv) out_valid <= full[rsel];
      if (rd_fire) begin
        case (DIR)
          0: begin out_r <= rx; rot_q <= modn(int'(ry) + int'(rz)); end
          1: begin out_r <= ry; rot_q <= modn(int'(rx) + int'(rz)); end
          default: begin out_r <= rz; rot_q <= modn(int'(rx) + int'(ry)); end
        endcase
        if (rx == CW'(N-1)) begin
          rx <= '0;
          if (ry == CW'(N-1)) begin
            ry <= '0;
            rz <= (rz == CW'(N-1)) ? '0 : rz + 1'b1;
          end else ry <= ry + 1'b1;
        end else rx <= rx + 1'b1;
        if (r_last) begin
          full[rsel] <= 1'b0;
          rsel       <= ~rsel;
        end
      end
    end
  end

  initial begin
    assert (N % WR_LANES == 0) else $error("N must be a multiple of WR_LANES");
    assert (2**CW == N) else $error("N must be a power of two");
  end
endmodule
