// tb_local_accum: feeds 3000 random points (ur, us, ut and six g values,
// each stream with its own random gaps) with random output stalls, and
// compares wr, ws, wt bit for bit with (a + b) + c sums of double products
// computed here. On an idle pipeline the result must be valid two edges
// after the edge that accepts the point (three register stages).
module tb_local_accum;
  import nek_pkg::*;
  logic clk = 0, rst_n;
  logic ur_valid, us_valid, ut_valid, g_valid, ur_ready, us_ready, ut_ready, g_ready;
  dbl_t ur, us, ut, wr, ws, wt;
  dbl_t [5:0] g;
  logic out_valid, out_ready;
  bit stall = 1;
  int checks = 0, failures = 0, n_in = 0, n_out = 0;
  dbl_t exp_q [$][3];

  local_accum dut (.*);
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic dbl_t rnd_dbl();
    real v;
    v = 0.5 + real'($urandom % 1000000) / 1000000.0;
    return $realtobits(($urandom % 2) ? -v : v);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ur_valid && ur_ready) begin
      real a, b, c, r [6];
      dbl_t e [3];
      a = $bitstoreal(ur); b = $bitstoreal(us); c = $bitstoreal(ut);
      for (int i = 0; i < 6; i++) r[i] = $bitstoreal(g[i]);
      e[0] = $realtobits(r[0]*a + r[1]*b + r[2]*c);
      e[1] = $realtobits(r[1]*a + r[3]*b + r[4]*c);
      e[2] = $realtobits(r[2]*a + r[4]*b + r[5]*c);
      exp_q.push_back(e);
      n_in <= n_in + 1;
    end
    if (out_valid && out_ready) begin
      checks += 3;
      if (wr !== exp_q[0][0]) failures++;
      if (ws !== exp_q[0][1]) failures++;
      if (wt !== exp_q[0][2]) failures++;
      void'(exp_q.pop_front());
      n_out <= n_out + 1;
    end
  end

  // each input stream keeps its data until it is taken
  always @(posedge clk) begin
    if (!rst_n || (ur_valid && ur_ready)) begin
      ur <= rnd_dbl(); us <= rnd_dbl(); ut <= rnd_dbl();
      for (int i = 0; i < 6; i++) g[i] <= rnd_dbl();
    end
    if (!(ur_valid && !ur_ready)) ur_valid <= rst_n && n_in < 3000 && (!stall || $urandom % 4 != 0);
    if (!(us_valid && !us_ready)) us_valid <= rst_n && n_in < 3000 && (!stall || $urandom % 4 != 0);
    if (!(ut_valid && !ut_ready)) ut_valid <= rst_n && n_in < 3000 && (!stall || $urandom % 4 != 0);
    if (!(g_valid && !g_ready))   g_valid  <= rst_n && n_in < 3000 && (!stall || $urandom % 4 != 0);
    out_ready <= !stall || ($urandom % 3 != 0);
  end

  initial begin
    int t;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (n_out < 3000) @(posedge clk);
    // idle-pipeline latency
    stall = 0;
    repeat (5) @(posedge clk);
    @(negedge clk);
    force ur_valid = 1'b1; force us_valid = 1'b1; force ut_valid = 1'b1; force g_valid = 1'b1;
    @(posedge clk); #0.1;
    force ur_valid = 1'b0; force us_valid = 1'b0; force ut_valid = 1'b0; force g_valid = 1'b0;
    t = 0;
    while (!out_valid && t < 10) begin @(posedge clk); #0.1; t++; end
    checks++;
    if (t != 2) begin failures++; $display("latency %0d", t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
