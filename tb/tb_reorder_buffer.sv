// tb_reorder_buffer: four buffers, N = 16 with eight points per beat along
// x, y and z, and N = 8 with one point per beat along y. Three elements
// whose point values encode (element, point index) are written with random
// gaps while the outputs are read with random stalls; every output line and
// out_r is checked against the expected points, in natural output order.
// A second pass with no stalls checks the ping-pong overlap: three elements
// through the x buffer take at most 3*N^3 + N^3/8 + 20 cycles.
module tb_reorder_buffer;
  import nek_pkg::*;
  localparam int unsigned NE = 3;
  logic clk = 0, rst_n;
  bit stall;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic dbl_t code(input int e, input int p);
    return {32'(e), 32'(p)};
  endfunction

  // one buffer under test with its own driver and checker
  `define RB_INST(NAME, NN, LN, DR) \
    logic NAME``_iv, NAME``_ir, NAME``_ov, NAME``_or; \
    dbl_t [LN-1:0] NAME``_id; \
    dbl_t [NN-1:0] NAME``_line; \
    logic [$clog2(NN)-1:0] NAME``_r; \
    int NAME``_wp = 0, NAME``_rp = 0; \
    reorder_buffer #(.N(NN), .WR_LANES(LN), .DIR(DR)) NAME ( \
      .clk, .rst_n, .in_valid(NAME``_iv), .in_ready(NAME``_ir), .in_data(NAME``_id), \
      .out_valid(NAME``_ov), .out_ready(NAME``_or), .out_line(NAME``_line), .out_r(NAME``_r)); \
    always_comb begin \
      NAME``_iv = rst_n && (NAME``_wp < NE * NN*NN*NN) && (!stall || ($urandom % 4 != 0)); \
      for (int q = 0; q < LN; q++) NAME``_id[q] = code((NAME``_wp + q) / (NN*NN*NN), (NAME``_wp + q) % (NN*NN*NN)); \
    end \
    always @(posedge clk) begin \
      NAME``_or <= !stall || ($urandom % 3 != 0); \
      if (rst_n && NAME``_iv && NAME``_ir) NAME``_wp <= NAME``_wp + LN; \
      if (rst_n && NAME``_ov && NAME``_or) begin \
        int e, p, x, y, z, c [3]; \
        e = NAME``_rp / (NN*NN*NN); p = NAME``_rp % (NN*NN*NN); \
        x = p % NN; y = (p / NN) % NN; z = p / (NN*NN); \
        checks++; \
        if (int'(NAME``_r) != (DR == 0 ? x : DR == 1 ? y : z)) failures++; \
        for (int l = 0; l < NN; l++) begin \
          c[0] = x; c[1] = y; c[2] = z; c[DR] = l; \
          checks++; \
          if (NAME``_line[l] !== code(e, c[0] + NN*c[1] + NN*NN*c[2])) begin \
            failures++; \
            if (failures < 5) $display(`"NAME line %0d elem %0d point %0d: %h`", l, e, p, NAME``_line[l]); \
          end \
        end \
        NAME``_rp <= NAME``_rp + 1; \
      end \
    end

  `RB_INST(rbx, 16, 8, 0)
  `RB_INST(rby, 16, 8, 1)
  `RB_INST(rbz, 16, 8, 2)
  `RB_INST(rb1, 8, 1, 1)

  initial begin
    int t;
    stall = 1;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (rbx_rp < NE*4096 || rby_rp < NE*4096 || rbz_rp < NE*4096 || rb1_rp < NE*512) @(posedge clk);
    checks++;
    if (rbx_ov || rby_ov || rbz_ov || rb1_ov) failures++;
    // second pass, no stalls: timing of the ping-pong overlap
    stall = 0;
    rst_n = 0;
    @(posedge clk);
    rbx_wp = 0; rbx_rp = 0; rby_wp = 0; rby_rp = 0; rbz_wp = 0; rbz_rp = 0; rb1_wp = 0; rb1_rp = 0;
    @(posedge clk);
    rst_n = 1;
    t = 0;
    while (rbx_rp < NE*4096) begin @(posedge clk); t++; end
    checks++;
    if (t > NE*4096 + 512 + 20) failures++;
    $display("three elements through the x buffer: %0d cycles", t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
