// Decoder controller: schedule of the metric computation, the L-MEM and
// C-MEM addresses, pruning and the commit of decisions.
//
// Bit i is decoded in one round: stages phi(i)..n are computed (stages 1..n
// for i = 0), stage lambda taking max(1, 2^(n-lambda)/T) cycles; the first
// stage of a round uses G (mode = 1, except for i = 0), the others F. An
// information bit adds one pruning cycle (ST_PRUNE) in which the PPU
// decides from the metrics in rBUF; a frozen bit is decided as 0 at the end
// of its last stage cycle. So a frame takes
//   N_C = 2N + (N/T) log2(N/(4T)) + K
// cycles (3200 for N = 1024, T = 8, K = 512), then one commit cycle
// (ST_FIN) and the result is valid in ST_DONE.
//
// Memories read synchronously, so the read address is derived from the
// next state: in every cycle the data for the current step is ready. Cycle k
// of stage lambda reads word k of S_{lambda-1} (C-MEM for lambda = 1) and
// produces half of word k/2 of S_lambda, written on odd k (or at once when
// the stage takes one cycle). If the word read was written in the same
// cycle the read was issued, bsel selects rBUF for it.
//
// At the end of a round (prune, or frozen) the decision of bit i is
// registered in the PPU while the previous decision (bit m = i-1) is
// committed into the PSUs, the CRC units and the data-bit store
// (commit, info_step); ST_FIN commits the last bit. The K-h first
// information bits go through the CRC, the last h are compared (crc_shift).
// start (in ST_IDLE or ST_DONE) begins a frame and pulses init. The
// schedule and cycle count follow the paper; the state encoding, the
// pruning-cycle placement and the start/done handshake are this design's.
module dec_ctrl
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned H     = H_DEF,
  localparam int unsigned N    = 1 << N_LOG,
  localparam int unsigned SW   = $clog2(N_LOG + 1),
  localparam int unsigned LT   = $clog2(T),
  localparam int unsigned CAW  = (N / (2 * T) > 1) ? $clog2(N / (2 * T)) : 1,
  localparam int unsigned LAW  = (N_LOG > 1 + $clog2(2 * T)) ? N_LOG - 1 - $clog2(2 * T) : 1,
  localparam int unsigned KW   = $clog2(K + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [N-1:0]       info_set,    // 1: information bit (incl. CRC bits)
  // state
  output dec_state_e         state,
  output logic [N_LOG-1:0]   bit_i,
  output logic [SW-1:0]      lam,
  output logic [N_LOG-1:0]   kcyc,
  output logic [SW-1:0]      phi_i,
  output logic               mode,        // 1: G
  // memories
  output logic [CAW-1:0]     cmem_raddr,
  output logic [SW-1:0]      lmem_rstage,
  output logic [LAW-1:0]     lmem_raddr,
  output logic               csel,
  output logic               bsel,
  output logic               active,
  output logic               single,
  output logic               half,
  output logic               we,
  output logic [SW-1:0]      wstage,
  output logic [LAW-1:0]     waddr,
  // decisions
  output logic               init,
  output logic               prune,
  output logic               frozen,
  output logic               commit,
  output logic [N_LOG-1:0]   commit_m,
  output logic               info_step,
  output logic               crc_shift,
  output logic               done
);
  dec_state_e         nst;
  logic [N_LOG-1:0]   ni, nk;
  logic [SW-1:0]      nlam;
  logic [KW-1:0]      info_cnt;
  logic               last_k, byp_d;

  // Runtime helpers.
  function automatic logic [SW-1:0] phi_rt(input logic [N_LOG-1:0] x);
    logic [SW-1:0] r;
    r = 1;
    for (int b = N_LOG - 1; b >= 0; b--)
      if (x[b]) r = SW'(N_LOG - b);
    return r;
  endfunction

  function automatic logic [N_LOG-1:0] ncyc_rt(input logic [SW-1:0] s);
    return (int'(s) < N_LOG - LT) ? N_LOG'(1 << (N_LOG - LT - int'(s))) : N_LOG'(1);
  endfunction

  assign phi_i  = (bit_i == 0) ? SW'(1) : phi_rt(bit_i);
  assign last_k = (kcyc == ncyc_rt(lam) - 1'b1);
  assign active = (state == ST_COMP);
  assign single = (ncyc_rt(lam) == 1);
  assign half   = kcyc[0];
  assign mode   = (bit_i != 0) && (lam == phi_i);
  assign csel   = (lam == SW'(1));
  assign we     = active && (single || half);
  assign wstage = lam;
  assign waddr  = LAW'(kcyc >> 1);
  assign prune  = (state == ST_PRUNE);
  assign frozen = active && last_k && (lam == SW'(N_LOG)) && !info_set[bit_i];
  assign init   = start && (state == ST_IDLE || state == ST_DONE);
  assign done   = (state == ST_DONE);

  // Commit of the previous decision at each round end; ST_FIN commits the last.
  assign commit    = ((prune || frozen) && bit_i != 0) || (state == ST_FIN);
  assign commit_m  = (state == ST_FIN) ? N_LOG'(N - 1) : bit_i - 1'b1;
  assign info_step = commit && info_set[commit_m];
  assign crc_shift = (info_cnt >= KW'(K - H));

  always_comb begin
    nst  = state;
    ni   = bit_i;
    nlam = lam;
    nk   = kcyc;
    unique case (state)
      ST_IDLE, ST_DONE:
        if (start) begin
          nst = ST_COMP; ni = '0; nlam = SW'(1); nk = '0;
        end
      ST_COMP:
        if (!last_k) nk = kcyc + 1'b1;
        else if (lam != SW'(N_LOG)) begin
          nlam = lam + 1'b1; nk = '0;
        end else if (info_set[bit_i]) nst = ST_PRUNE;
        else if (bit_i == N_LOG'(N - 1)) nst = ST_FIN;
        else begin
          ni = bit_i + 1'b1; nlam = phi_rt(bit_i + 1'b1); nk = '0;
        end
      ST_PRUNE:
        if (bit_i == N_LOG'(N - 1)) nst = ST_FIN;
        else begin
          nst = ST_COMP; ni = bit_i + 1'b1; nlam = phi_rt(bit_i + 1'b1); nk = '0;
        end
      ST_FIN:  nst = ST_DONE;
      default: nst = ST_IDLE;
    endcase
  end

  // Read addresses for the next step (synchronous memories).
  assign cmem_raddr  = CAW'(nk);
  assign lmem_rstage = nlam - 1'b1;
  assign lmem_raddr  = LAW'(nk);
  assign byp_d = we && (nst == ST_COMP) && (nlam != SW'(1)) &&
                 (nlam - 1'b1 == lam) && (LAW'(nk) == waddr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      bit_i    <= '0;
      lam      <= SW'(1);
      kcyc     <= '0;
      bsel     <= 1'b0;
      info_cnt <= '0;
    end else begin
      state <= nst;
      bit_i <= ni;
      lam   <= nlam;
      kcyc  <= nk;
      bsel  <= byp_d;
      if (init) info_cnt <= '0;
      else if (info_step) info_cnt <= info_cnt + 1'b1;
    end
  end

  // The write/read pattern relies on these relations.
  initial assert (N_LOG >= LT + 2) else $error("need n >= log2(T) + 2");
  initial assert (K > H) else $error("need K > h");
endmodule
