// Processing unit array (PUA) of one decoding path: T PUs working on 2T
// input LLM pairs per cycle and producing T output pairs.
//
// PU j takes input pairs 2j and 2j+1 and produces output pair j. Its input
// width p[j] comes from fine grained PU profiling (polar_pkg::fpp_width):
// only the first 2^(n-lambda) PUs are used on the small late stages, whose
// LLMs are the widest, so the PUs with high index are built narrower. With
// n = 10, T = 8, t = 4 the widths are 13,12,11,11,10,10,10,10. Inputs and
// outputs travel on a uniform bus W = t+n bits wide; each PU reads the low
// p[j] bits and its (p[j]+1)-bit result is zero-extended. Combinational.
module pua
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned W    = Q + N_LOG
) (
  input  logic [2*T-1:0][1:0][W-1:0] din,   // input LLM pairs
  input  logic [T-1:0]               u,     // partial sum per PU
  input  logic                       mode,  // 0: F, 1: G
  output logic [T-1:0][1:0][W-1:0]   dout
);
  for (genvar j = 0; j < T; j++) begin : g_pu
    localparam int unsigned PJ = fpp_width(j, N_LOG, T, Q);
    logic [1:0][PJ-1:0] a, b;
    logic [1:0][PJ:0]   c;
    assign a[0] = din[2*j][0][PJ-1:0];
    assign a[1] = din[2*j][1][PJ-1:0];
    assign b[0] = din[2*j+1][0][PJ-1:0];
    assign b[1] = din[2*j+1][1][PJ-1:0];
    pu #(.P(PJ)) u_pu (.a(a), .b(b), .u(u[j]), .mode(mode), .c(c));
    assign dout[j][0] = W'(c[0]);
    assign dout[j][1] = W'(c[1]);
  end
endmodule
