// Internal LLM memory (L-MEM).
//
// Holds the stage-lambda LLMs P_lambda of all L paths for lambda = 1..n,
// each quantised to t+lambda bits, in n regular sub-memories S_1..S_n
// (lmem_sub). Since a stage only ever reads the stage below it and writes
// its own, one write port (stage wstage) and one read port (stage rstage)
// suffice; the read data of the stage addressed one cycle earlier is
// returned. Widths: S_lambda words carry min(2T, 2^(n-lambda)) LLM pairs per
// path. The sub-memory shapes follow the paper; it further packs them as
// bit planes into lambda_o = n - log2(T) - 1 regular macros for a memory
// compiler, which this RTL leaves to the back end (each S_lambda is its own
// array here).
module lmem
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned W    = Q + N_LOG,
  localparam int unsigned SW   = $clog2(N_LOG + 1),
  localparam int unsigned AW   = (N_LOG > 1 + $clog2(2 * T)) ? N_LOG - 1 - $clog2(2 * T) : 1
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [SW-1:0]                     wstage,   // 1..n
  input  logic [AW-1:0]                     waddr,
  input  logic [L-1:0][2*T-1:0][1:0][W-1:0] wdata,
  input  logic [SW-1:0]                     rstage,   // 1..n
  input  logic [AW-1:0]                     raddr,
  output logic [L-1:0][2*T-1:0][1:0][W-1:0] rdata
);
  logic [L-1:0][2*T-1:0][1:0][W-1:0] sub_rdata [N_LOG+1];
  logic [SW-1:0] rstage_q;

  assign sub_rdata[0] = '0;

  for (genvar lam = 1; lam <= N_LOG; lam++) begin : g_sub
    localparam int unsigned DEP = words_depth(lam, N_LOG, T);
    localparam int unsigned SAW = (DEP > 1) ? $clog2(DEP) : 1;
    lmem_sub #(
      .L(L), .T(T), .W(W), .WS(Q + lam), .E(words_elems(lam, N_LOG, T)), .DEPTH(DEP)
    ) u_sub (
      .clk  (clk),
      .we   (we && (wstage == SW'(lam))),
      .waddr(SAW'(waddr)),
      .wdata(wdata),
      .raddr(SAW'(raddr)),
      .rdata(sub_rdata[lam])
    );
  end

  always_ff @(posedge clk) rstage_q <= rstage;

  assign rdata = (rstage_q <= SW'(N_LOG)) ? sub_rdata[rstage_q] : '0;
endmodule
