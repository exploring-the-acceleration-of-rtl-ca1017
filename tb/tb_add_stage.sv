// tb_add_stage: 3000 random sums with independent random gaps on both
// inputs and random output stalls, checked bit for bit against double
// addition; with a ready output one sum leaves per cycle (1000 sums in
// 1000 cycles plus one cycle of latency).
module tb_add_stage;
  import nek_pkg::*;
  logic clk = 0, rst_n;
  logic a_valid, b_valid, a_ready, b_ready, y_valid, y_ready;
  dbl_t a, b, y;
  bit stall = 1;
  int checks = 0, failures = 0, n_in = 0, n_out = 0, limit = 3000;
  dbl_t exp_q [$];

  add_stage dut (.*);
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic dbl_t rnd_dbl();
    logic [63:0] v;
    v = {$urandom, $urandom};
    v[62:52] = 11'(1023 - 20 + ($urandom % 41));
    return v;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (a_valid && a_ready) begin
      exp_q.push_back($realtobits($bitstoreal(a) + $bitstoreal(b)));
      n_in <= n_in + 1;
    end
    if (y_valid && y_ready) begin
      checks++;
      if (y !== exp_q[0]) failures++;
      void'(exp_q.pop_front());
      n_out <= n_out + 1;
    end
  end

  always @(posedge clk) begin
    if (!rst_n || (a_valid && a_ready)) begin a <= rnd_dbl(); b <= rnd_dbl(); end
    if (!(a_valid && !a_ready)) a_valid <= rst_n && n_in < limit && (!stall || $urandom % 4 != 0);
    if (!(b_valid && !b_ready)) b_valid <= rst_n && n_in < limit && (!stall || $urandom % 4 != 0);
    y_ready <= !stall || ($urandom % 3 != 0);
  end

  initial begin
    int t;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_out < 3000) @(posedge clk);
    stall = 0; limit = 4000;
    t = 0;
    while (n_out < 4000) begin @(posedge clk); t++; end
    checks++;
    if (t > 1000 + 3) begin failures++; $display("1000 sums took %0d cycles", t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
