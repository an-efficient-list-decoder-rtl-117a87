// Shared constants and elaboration-time helper functions of the CA-SCL polar
// list decoder.
//
// The default code is the one the decoder was built for: N = 2^10 = 1024,
// list size L = 4, T = 8 processing units per path, t = 4-bit channel
// messages and a 32-bit CRC with generator 0x1EDC6F41. All modules take these
// as parameters; the functions below derive the schedule and the per-PU
// widths from them, so they are evaluated on constants only.
package polar_pkg;

  localparam int unsigned N_LOG_DEF = 10;            // n, N = 2^n
  localparam int unsigned L_DEF     = 4;             // list size
  localparam int unsigned T_DEF     = 8;             // PUs per path
  localparam int unsigned Q_DEF     = 4;             // t, channel LLM bits
  localparam int unsigned H_DEF     = 32;            // CRC length h
  localparam logic [31:0] POLY_DEF  = 32'h1EDC6F41;  // CRC32 generator, x^32 implied
  localparam int unsigned K_DEF     = 512;           // information bits incl. CRC

  // Controller phases.
  typedef enum logic [2:0] {
    ST_IDLE  = 3'd0,  // waiting for start
    ST_COMP  = 3'd1,  // one cycle of a stage of the metric computation
    ST_PRUNE = 3'd2,  // path pruning cycle after the last stage of an information bit
    ST_FIN   = 3'd3,  // commit of the last decision
    ST_DONE  = 3'd4   // result valid
  } dec_state_e;

  // phi(i): the first stage recomputed for bit i. With i written as
  // b_1..b_n (b_1 the MSB), phi is the largest lambda with b_lambda = 1,
  // i.e. n minus the number of trailing zeros of i; phi(0) = 1.
  function automatic int unsigned phi(input int unsigned i, input int unsigned n);
    int unsigned r;
    if (i == 0) return 1;
    r = n;
    for (int unsigned b = 0; b < n; b++) begin
      if (((i >> b) & 1) != 0) return r;
      r--;
    end
    return 1;
  endfunction

  // Cycles spent on stage lambda: its 2^(n-lambda) outputs are produced T at
  // a time, at least one cycle.
  function automatic int unsigned stage_cycles(input int unsigned lam, input int unsigned n,
                                               input int unsigned t_pu);
    int unsigned e;
    e = 1 << (n - lam);
    return (e > t_pu) ? e / t_pu : 1;
  endfunction

  // LLM pairs of one path held in one word of sub-memory S_lambda.
  function automatic int unsigned words_elems(input int unsigned lam, input int unsigned n,
                                              input int unsigned t_pu);
    int unsigned e;
    e = 1 << (n - lam);
    return (e > 2 * t_pu) ? 2 * t_pu : e;
  endfunction

  // Words of sub-memory S_lambda.
  function automatic int unsigned words_depth(input int unsigned lam, input int unsigned n,
                                              input int unsigned t_pu);
    int unsigned e;
    e = 1 << (n - lam);
    return (e > 2 * t_pu) ? e / (2 * t_pu) : 1;
  endfunction

  // Fine grained PU profiling: input LLM width p[j] of PU j.
  //   lambda_o = n - log2(T) - 1;  p[j] = t + lambda_o - 1;
  //   for lambda = lambda_o+1 .. n: for j < 2^(n-lambda): p[j] = t + lambda - 1
  function automatic int unsigned fpp_width(input int unsigned j, input int unsigned n,
                                            input int unsigned t_pu, input int unsigned q);
    int unsigned lam_o, p;
    lam_o = n - $clog2(t_pu) - 1;
    p = q + lam_o - 1;
    for (int unsigned lam = lam_o + 1; lam <= n; lam++)
      if (j < (1 << (n - lam))) p = q + lam - 1;
    return p;
  endfunction

  // Decoding cycles N_C = 2N + (N/T) log2(N/(4T)) + n_p K with n_p = 1.
  function automatic int unsigned decode_cycles(input int unsigned n, input int unsigned t_pu,
                                                input int unsigned k);
    int unsigned nn;
    nn = 1 << n;
    return 2 * nn + (nn / t_pu) * (n - $clog2(4 * t_pu)) + k;
  endfunction

endpackage
