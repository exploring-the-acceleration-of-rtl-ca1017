// tb_mxm_unit: two units at N = 16, one multiplying from the left (M*X)
// and one from the right (X*M). A random matrix is loaded (column major,
// eight doubles per word), then random lines with random output indices are
// fed with random stalls on both sides. Each result is compared bit for bit
// with a pairwise tree of double products computed here. The pipeline
// depth is checked on an idle pipeline: the edge that accepts a line loads
// the multiply stage and the result is valid log2(N) = 4 edges later.
module tb_mxm_unit;
  import nek_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n, start;
  bit stall;
  int checks = 0, failures = 0;
  real m [N*N];
  always #1 clk = ~clk;

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real rnd_real();
    real v;
    v = 0.5 + real'($urandom % 1000000) / 1000000.0;
    return ($urandom % 2) ? -v : v;
  endfunction

  function automatic real tree_sum(input real v [N]);
    real t [N];
    int unsigned n;
    t = v; n = N;
    while (n > 1) begin
      for (int unsigned i = 0; i < n / 2; i++) t[i] = t[2*i] + t[2*i+1];
      n = n / 2;
    end
    return t[0];
  endfunction

  `define MXM_INST(NAME, LFT) \
    logic NAME``_mv, NAME``_mr, NAME``_iv, NAME``_ir, NAME``_ov, NAME``_or; \
    word_t NAME``_md; \
    dbl_t [N-1:0] NAME``_line; \
    logic [3:0] NAME``_r; \
    dbl_t NAME``_od; \
    real NAME``_exp [$]; \
    int NAME``_n = 0, NAME``_mw = 0; \
    mxm_unit #(.N(N), .LEFT(LFT)) NAME (.clk, .rst_n, .start, \
      .mat_valid(NAME``_mv), .mat_ready(NAME``_mr), .mat_data(NAME``_md), \
      .in_valid(NAME``_iv), .in_ready(NAME``_ir), .in_line(NAME``_line), .in_r(NAME``_r), \
      .out_valid(NAME``_ov), .out_ready(NAME``_or), .out_data(NAME``_od)); \
    always_comb begin \
      NAME``_mv = rst_n && (NAME``_mw < N*N/8); \
      for (int q = 0; q < 8; q++) NAME``_md[64*q +: 64] = $realtobits(m[8*NAME``_mw + q]); \
    end \
    always @(posedge clk) if (rst_n) begin \
      if (NAME``_mv && NAME``_mr) NAME``_mw <= NAME``_mw + 1; \
      if (NAME``_iv && NAME``_ir) begin \
        real v [N]; \
        for (int l = 0; l < N; l++) \
          v[l] = (LFT ? m[int'(NAME``_r) + N*l] : m[l + N*int'(NAME``_r)]) * $bitstoreal(NAME``_line[l]); \
        NAME``_exp.push_back(tree_sum(v)); \
      end \
      if (NAME``_ov && NAME``_or) begin \
        checks++; \
        if (NAME``_od !== $realtobits(NAME``_exp[0])) begin \
          failures++; \
          if (failures < 5) $display(`"NAME: got %h expected %h`", NAME``_od, $realtobits(NAME``_exp[0])); \
        end \
        void'(NAME``_exp.pop_front()); \
        NAME``_n <= NAME``_n + 1; \
      end \
    end \
    always @(posedge clk) begin \
      if (!(NAME``_iv && !NAME``_ir)) begin \
        NAME``_iv <= rst_n && NAME``_n + NAME``_exp.size() < 2000 && (!stall || $urandom % 4 != 0); \
        for (int l = 0; l < N; l++) NAME``_line[l] <= $realtobits(rnd_real()); \
        NAME``_r <= 4'($urandom); \
      end \
      NAME``_or <= !stall || ($urandom % 3 != 0); \
    end

  `MXM_INST(mxl, 1'b1)
  `MXM_INST(mxr, 1'b0)

  initial begin
    int t;
    foreach (m[i]) m[i] = rnd_real();
    stall = 1; start = 0;
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (mxl_n < 1000 || mxr_n < 1000) @(posedge clk);
    // latency on an idle pipeline: stop feeding, drain, then one line
    stall = 0;
    force mxl_iv = 1'b0;
    repeat (20) @(posedge clk);
    @(negedge clk);
    release mxl_iv;
    force mxl_iv = 1'b1;
    @(posedge clk); #0.1;
    release mxl_iv;
    force mxl_iv = 1'b0;
    t = 0;
    while (!mxl_ov) begin @(posedge clk); #0.1; t++; end
    checks++;
    if (t != 4) begin failures++; $display("latency %0d", t); end
    release mxl_iv;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
