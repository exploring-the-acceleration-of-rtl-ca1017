// Reference helpers shared by the testbenches: random doubles of magnitude
// 0.5 to 1.5 (far from the subnormal range), the pairwise summation tree the
// matrix multiplications use, and the linear index of grid point (x, y, z).
// The including scope defines the localparam N.
  function automatic real rnd_real();
    real v;
    v = 0.5 + real'($urandom % 1000000) / 1000000.0;
    return ($urandom % 2) ? -v : v;
  endfunction

  function automatic real tree_sum(input real v [N]);
    real t [N];
    int unsigned n;
    t = v;
    n = N;
    while (n > 1) begin
      for (int unsigned i = 0; i < n / 2; i++) t[i] = t[2*i] + t[2*i+1];
      n = n / 2;
    end
    return t[0];
  endfunction

  function automatic int unsigned idx(input int unsigned x, y, z);
    return x + N * y + N * N * z;
  endfunction

