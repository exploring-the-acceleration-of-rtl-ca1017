// tb_fp64_mul: self-checking test of the binary64 mul core. Random operands
// with exponents well inside the normal range, plus cancellation, zero and
// infinity cases, are compared bit for bit with the simulator's own double
// arithmetic (round to nearest even). One cycle of latency is checked by
// sampling y one edge after the operands are applied.
module tb_fp64_mul;
  import nek_pkg::*;
  logic clk = 0;
  logic en;
  dbl_t a, b, y;
  int checks = 0, failures = 0;
  fp64_mul dut (.clk(clk), .en(en), .a(a), .b(b), .y(y));
  always #5 clk = ~clk;

  function automatic dbl_t rnd_dbl();
    logic [63:0] v;
    v = {$urandom(), $urandom()};
    v[62:52] = 11'(1023 - 40 + ($urandom() % 81));
    return v;
  endfunction

  task automatic check(input dbl_t x, input dbl_t z);
    real ra, rb;
    dbl_t exp_y;
    ra = $bitstoreal(x); rb = $bitstoreal(z);
    exp_y = $realtobits(ra * rb);
    a = x; b = z; en = 1;
    @(posedge clk); #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h mul %h: got %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dbl_t x, z;
    en = 0; a = 0; b = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 3000; i++) begin
      x = rnd_dbl(); z = rnd_dbl();
      if (i % 5 == 1) z = {~x[63], x[62:52], x[51:0] ^ 52'($urandom() & 32'hF)}; // near cancellation
      if (i % 7 == 2) z = {z[63], x[62:52], z[51:0]};                              // equal exponents
      check(x, z);
    end
    check(64'h3FF0_0000_0000_0000, 64'h0);               // 1 and +0
    check(64'h4000_0000_0000_0000, 64'hC000_0000_0000_0000);
    check(64'h7FF0_0000_0000_0000, 64'h3FF0_0000_0000_0000); // inf
    check(64'h3FF0_0000_0000_0001, 64'h3FF0_0000_0000_0003);
    // en low holds the output
    begin
      dbl_t held;
      held = y; en = 0; a = 64'h4010_0000_0000_0000; b = a;
      @(posedge clk); #1;
      checks++;
      if (y !== held) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
