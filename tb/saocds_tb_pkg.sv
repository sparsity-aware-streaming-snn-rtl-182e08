// saocds_tb_pkg: reference arithmetic and offline planning used by the
// testbenches. Everything here is written independently of the RTL: plain
// integer arithmetic for the LIF neuron, and the offline iteration count
// (REPS) of a convolution layer obtained by walking the paper's Algorithm 2
// over the weight pattern, as the host would do before loading the weights.
package saocds_tb_pkg;

  // Uniform random integer in 0 .. n-1.
  function automatic int urand(input int unsigned n);
    int unsigned r;
    r = $urandom;
    return int'(r % n);
  endfunction

  // Wrap a value to a 24-bit two's complement potential.
  function automatic int wrap24(input longint x);
    longint m;
    m = x & 64'hFFFFFF;
    if (m >= 64'h800000) m = m - 64'h1000000;
    return int'(m);
  endfunction

  // alpha * u - theta * s with alpha in Q1.15, rounded down.
  function automatic int leak_ref(input int u, input bit s, input int alpha, input int theta);
    longint p;
    longint q;
    p = longint'(u) * longint'(alpha);
    // floor division by 2^15 for negative numbers too
    q = (p >= 0) ? (p / 32768) : -((-p + 32767) / 32768);
    return wrap24(q - (s ? longint'(theta) : 0));
  endfunction

  // Pack one neuron's parameters into the 64-bit configuration word.
  function automatic logic [63:0] param_word(input int alpha, input int theta, input int uth);
    return {alpha[15:0], theta[23:0], uth[23:0]};
  endfunction

  // Pack one COO entry into the 64-bit configuration word.
  function automatic logic [63:0] coo_word(input int d, input int ri, input int ci);
    logic [63:0] w;
    w = '0;
    w[15:0]  = d[15:0];
    w[31:16] = ri[15:0];
    w[39:32] = ci[7:0];
    return w;
  endfunction

  // Number of iterations per timestep (NNZ + extra + empty [+ drain]) of a
  // convolution layer whose non-zero weights, sorted by output channel, have
  // row indices ri[0..nnz-1]. Also returns how many are extra and empty.
  function automatic int plan_reps(input int ic_n, input int oc_n, input int nnz_n,
                                   input int ri[], output int n_extra, output int n_empty);
    int reps, icr, oc, pre_oc, nnz, nnz_oc, nnz_next_oc, ic;
    reps = 0; icr = 0; oc = 0; pre_oc = oc_n; nnz = 0; n_extra = 0; n_empty = 0;
    while (!(oc == oc_n && nnz == nnz_n && icr == ic_n)) begin
      if (icr < ic_n) icr++;
      nnz_oc      = (nnz < nnz_n) ? ri[nnz] / ic_n : oc_n;
      nnz_next_oc = (nnz + 1 < nnz_n) ? ri[nnz+1] / ic_n : oc_n;
      if (oc == oc_n) begin
        // only reads input
      end else if (oc != nnz_oc) begin
        n_extra++; oc++;
      end else begin
        ic = ri[nnz] % ic_n;
        if (ic < icr) begin
          if (nnz_next_oc != oc) oc++;
          pre_oc = oc;
          nnz++;
        end else n_empty++;
      end
      reps++;
    end
    return reps;
  endfunction

endpackage
