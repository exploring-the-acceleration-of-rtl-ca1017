// Shared body of the end-to-end testbenches of nekbone_ax_top.
//
// The including module defines the localparams N (polynomial order),
// NK (kernels), NELT (elements per job) and STALLS (1: the memory model
// withholds ready and delays responses at random), then instantiates the
// top as "dut" with .* connections.
//
// A behavioural memory stands in for HBM: one flat word-addressed store,
// every port with its own request queue and a response latency of
// LAT cycles. u, g and the derivative matrix are random doubles; the
// expected w is computed here with the simulator's double arithmetic in
// the order the hardware uses (pairwise dot-product trees, left-to-right
// sums), so the comparison is bit exact. The job is run twice: once with
// random memory stalls, once with an always-ready memory, where the run
// time is checked against the one-point-per-cycle rate of each kernel.
// Each mechanism of the design is counted and must occur at least once.
// The including module also defines the macros KPATH(k), the hierarchical
// path of kernel k, and KBUSY, the vector of kernel busy flags.

  import nek_pkg::*;
  localparam int unsigned AW   = 32;
  localparam int unsigned NPTS = N * N * N;
  localparam int unsigned UWD  = NPTS / 8;
  localparam int unsigned LAT  = 6;
  localparam logic [AW-1:0] U_BASE  = 32'h0000_0000;
  localparam logic [AW-1:0] G_BASE  = 32'h0100_0000;
  localparam logic [AW-1:0] D_BASE  = 32'h0200_0000;
  localparam logic [AW-1:0] DT_BASE = 32'h0200_1000;
  localparam logic [AW-1:0] W_BASE  = 32'h0300_0000;

  logic clk = 1'b0;
  logic rst_n;
  logic start;
  logic [31:0] nelt;
  logic [AW-1:0] u_base, g_base, dxm1_base, dxtm1_base, w_base;
  logic busy, done;
  logic [NK-1:0][5:0]         rd_req_valid, rd_req_ready, rd_rsp_valid, rd_rsp_ready;
  logic [NK-1:0][5:0][AW-1:0] rd_req_addr;
  word_t [NK-1:0][5:0]        rd_rsp_data;
  logic [NK-1:0]              wr_valid, wr_ready;
  logic [NK-1:0][AW-1:0]      wr_addr;
  word_t [NK-1:0]             wr_data;

  int checks = 0, failures = 0;
  longint cycle = 0;
  bit stall_mode;

  always #1 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // ------------------------------------------------------------ memory
  word_t mem [logic [AW-1:0]];
  real   uval [], gval [], wexp [];
  real   dmat [N*N];          // dxm1, column major
  real   dtmat [N*N];         // dxtm1 = transpose

  function automatic word_t rd_word(input logic [AW-1:0] a);
    if (mem.exists(a)) return mem[a];
    return '0;
  endfunction

  for (genvar k = 0; k < NK; k++) begin : g_mk
    for (genvar p = 0; p < 6; p++) begin : g_mp
      logic [AW-1:0] q_addr [$];
      longint        q_due [$];
      always @(posedge clk) begin
        if (!rst_n) begin
          rd_rsp_valid[k][p] <= 1'b0;
          rd_req_ready[k][p] <= 1'b0;
          q_addr.delete(); q_due.delete();
        end else begin
          if (rd_req_valid[k][p] && rd_req_ready[k][p]) begin
            q_addr.push_back(rd_req_addr[k][p]);
            q_due.push_back(cycle + LAT + (stall_mode ? longint'($urandom % 8) : 0));
          end
          if (rd_rsp_valid[k][p] && rd_rsp_ready[k][p]) begin
            void'(q_addr.pop_front()); void'(q_due.pop_front());
          end
          rd_req_ready[k][p] <= stall_mode ? ($urandom % 4 != 0) : 1'b1;
          if (q_addr.size() > 0 && q_due[0] <= cycle && (!stall_mode || $urandom % 3 != 0)) begin
            rd_rsp_valid[k][p] <= 1'b1;
            rd_rsp_data[k][p]  <= rd_word(q_addr[0]);
          end else rd_rsp_valid[k][p] <= 1'b0;
        end
      end
    end
    always @(posedge clk) begin
      if (!rst_n) wr_ready[k] <= 1'b0;
      else begin
        if (wr_valid[k] && wr_ready[k]) mem[wr_addr[k]] = wr_data[k];
        // long write-side outages back the whole kernel up
        wr_ready[k] <= stall_mode ? (((cycle % (8*NPTS)) < 2*NPTS || (cycle % (8*NPTS)) >= 5*NPTS) && $urandom % 5 != 0) : 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ reference
  `include "nek_ref.svh"

  task automatic build_reference();
    real ur [NPTS], us [NPTS], ut [NPTS], wr [NPTS], ws [NPTS], wt [NPTS];
    real v [N];
    uval = new[NELT * NPTS];
    gval = new[NELT * NPTS * 6];
    wexp = new[NELT * NPTS];
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) dmat[r + N*c] = rnd_real();
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) dtmat[r + N*c] = dmat[c + N*r];
    foreach (uval[i]) uval[i] = rnd_real();
    foreach (gval[i]) gval[i] = rnd_real();
    for (int e = 0; e < NELT; e++) begin
      int unsigned b;
      b = e * NPTS;
      for (int z = 0; z < N; z++) for (int y = 0; y < N; y++) for (int x = 0; x < N; x++) begin
        for (int l = 0; l < N; l++) v[l] = dmat[x + N*l] * uval[b + idx(l, y, z)];
        ur[idx(x,y,z)] = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dtmat[l + N*y] * uval[b + idx(x, l, z)];
        us[idx(x,y,z)] = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dtmat[l + N*z] * uval[b + idx(x, y, l)];
        ut[idx(x,y,z)] = tree_sum(v);
      end
      for (int i = 0; i < NPTS; i++) begin
        real g0, g1, g2, g3, g4, g5;
        g0 = gval[6*(b+i)+0]; g1 = gval[6*(b+i)+1]; g2 = gval[6*(b+i)+2];
        g3 = gval[6*(b+i)+3]; g4 = gval[6*(b+i)+4]; g5 = gval[6*(b+i)+5];
        wr[i] = g0*ur[i] + g1*us[i] + g2*ut[i];
        ws[i] = g1*ur[i] + g3*us[i] + g4*ut[i];
        wt[i] = g2*ur[i] + g4*us[i] + g5*ut[i];
      end
      for (int z = 0; z < N; z++) for (int y = 0; y < N; y++) for (int x = 0; x < N; x++) begin
        real a, c, d;
        for (int l = 0; l < N; l++) v[l] = dtmat[x + N*l] * wr[idx(l, y, z)];
        a = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dmat[l + N*y] * ws[idx(x, l, z)];
        c = tree_sum(v);
        for (int l = 0; l < N; l++) v[l] = dmat[l + N*z] * wt[idx(x, y, l)];
        d = tree_sum(v);
        wexp[b + idx(x,y,z)] = (a + c) + d;
      end
    end
  endtask

  task automatic load_memory();
    word_t wd;
    for (int i = 0; i < NELT * NPTS / 8; i++) begin
      for (int q = 0; q < 8; q++) wd[64*q +: 64] = $realtobits(uval[8*i+q]);
      mem[U_BASE + AW'(i)] = wd;
    end
    for (int i = 0; i < NELT * NPTS * 6 / 8; i++) begin
      for (int q = 0; q < 8; q++) wd[64*q +: 64] = $realtobits(gval[8*i+q]);
      mem[G_BASE + AW'(i)] = wd;
    end
    for (int i = 0; i < N * N / 8; i++) begin
      for (int q = 0; q < 8; q++) wd[64*q +: 64] = $realtobits(dmat[8*i+q]);
      mem[D_BASE + AW'(i)] = wd;
      for (int q = 0; q < 8; q++) wd[64*q +: 64] = $realtobits(dtmat[8*i+q]);
      mem[DT_BASE + AW'(i)] = wd;
    end
    for (int i = 0; i < NELT * NPTS / 8; i++) mem[W_BASE + AW'(i)] = '1;
  endtask

  task automatic check_results();
    int bad;
    bad = 0;
    for (int i = 0; i < NELT * NPTS; i++) begin
      dbl_t got, want;
      got  = rd_word(W_BASE + AW'(i / 8))[64*(i%8) +: 64];
      want = $realtobits(wexp[i]);
      checks++;
      if (got !== want) begin
        failures++;
        bad++;
        if (bad <= 5) $display("w[%0d] = %h, expected %h (%f)", i, got, want, wexp[i]);
      end
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  longint n_pingpong = 0, n_three_phase = 0, n_mem_stall = 0, n_buf_full = 0;
  longint n_multi_kernel = 0, n_g_regroup = 0, n_wr_stall = 0;
  for (genvar k = 0; k < NK; k++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      // CU1 buffer filled with the next element while serving the current one
      if (`KPATH(k).u_cu1.g_dir[0].u_rb.in_fire && `KPATH(k).u_cu1.g_dir[0].u_rb.rd_fire)
        n_pingpong++;
      // reading e+1, computing e in CU1 and e-1 in CU3 at the same time
      if (`KPATH(k).u_cu1.g_dir[0].u_rb.in_fire
          && `KPATH(k).u_cu1.g_dir[0].u_rb.rd_fire
          && `KPATH(k).u_cu3.g_dir[0].u_rb.rd_fire
          && `KPATH(k).u_cu3.g_dir[0].u_rb.rsel != `KPATH(k).u_cu3.g_dir[0].u_rb.wsel)
        n_three_phase++;
      if (|(rd_req_valid[k] & ~rd_req_ready[k])) n_mem_stall++;
      if (`KPATH(k).u_cu3.w_valid[0] && !`KPATH(k).u_cu3.w_ready[0]) n_buf_full++;
      if (`KPATH(k).u_cu2.u_read_g.push && `KPATH(k).u_cu2.u_read_g.pop) n_g_regroup++;
      if (`KPATH(k).u_cu3.y_valid && !`KPATH(k).u_cu3.y_ready) n_wr_stall++;
    end
  end
  always @(posedge clk) if (rst_n && $countones(`KBUSY) > 1) n_multi_kernel++;

  // ------------------------------------------------------------ run
  task automatic run_job(output longint cycles);
    longint t0;
    @(posedge clk);
    start <= 1'b1;
    t0 = cycle;
    @(posedge clk);
    start <= 1'b0;
    while (!done) @(posedge clk);
    cycles = cycle - t0;
  endtask

  initial begin
    #(2 * WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint c_stall, c_fast, per_k, bound;
    rst_n = 1'b0; start = 1'b0; nelt = NELT; stall_mode = STALLS;
    u_base = U_BASE; g_base = G_BASE; dxm1_base = D_BASE; dxtm1_base = DT_BASE; w_base = W_BASE;
    build_reference();
    load_memory();
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);
    if (STALLS) begin
      run_job(c_stall);
      check_results();
      $display("job with memory stalls: %0d cycles", c_stall);
      for (int i = 0; i < NELT * NPTS / 8; i++) mem[W_BASE + AW'(i)] = '1;
    end
    stall_mode = 1'b0;
    run_job(c_fast);
    check_results();
    per_k = (NELT + NK - 1) / NK;
    // one point per cycle per kernel, plus filling the first buffer and
    // draining the last element through CU3
    bound = per_k * NPTS + 2 * NPTS + NPTS / 8 + 200;
    $display("job without stalls: %0d cycles for %0d elements per kernel (bound %0d)", c_fast, per_k, bound);
    checks++;
    if (c_fast > bound || c_fast < per_k * NPTS) begin
      failures++;
      $display("run time outside the expected range");
    end
    $display("events: pingpong=%0d three_phase=%0d mem_stall=%0d buffer_full=%0d multi_kernel=%0d g_regroup=%0d write_stall=%0d",
             n_pingpong, n_three_phase, n_mem_stall, n_buf_full, n_multi_kernel, n_g_regroup, n_wr_stall);
    checks += 5;
    if (n_pingpong == 0 || n_g_regroup == 0) failures++;
    if (NK > 1 && n_multi_kernel == 0) failures++;
    if (per_k > 2 && n_three_phase == 0) failures++;
    if (STALLS && (n_mem_stall == 0 || n_wr_stall == 0)) failures++;
    if (STALLS && n_buf_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
