// CA-SCL polar list decoder, top level.
//
// Decodes one frame of a length N = 2^n polar code with a list of L paths
// and picks the output by CRC. Datapath, per cycle:
//   C-MEM -> deComp -> csel -> bsel (rBUF bypass) -> CB -> PUA_0..PUA_{L-1}
//   -> OSel/wBUF -> L-MEM, rBUF
// and after the last stage of an information bit rBUF -> PPU (MVF + CCG).
// The PSUs give the PUAs their G-mode partial sums, the CRC units and the
// data-bit store follow every decision, and direct selection picks the
// first path whose CRC matches.
//
// Interface: load the frame through ch_we/ch_waddr/ch_wdata (word w holds
// the compressed messages {Msg, s} of received bits 2Tw .. 2Tw+2T-1, message
// e in bits [e*(t+1) +: t+1]), hold info_set (bit i = 1 for the K
// information positions, CRC included) stable, pulse start. done rises
// N_C + 1 cycles later (N_C = 2N + (N/T)log2(N/(4T)) + K, 3200 at the
// defaults) and stays until the next start; then data holds the K-h data
// bits (data[j] = j-th data bit), sel the chosen path and fail = 1 if no
// path passed the CRC (path 0 is output then). The C-MEM may be loaded
// for the next frame only after done. busy, cur_bit and list_full are
// status outputs for observation only. Reset is asynchronous, active low.
module list_decoder
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned Q     = Q_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned H     = H_DEF,
  parameter logic [H-1:0] POLY = H'(POLY_DEF),
  localparam int unsigned N    = 1 << N_LOG,
  localparam int unsigned W    = Q + N_LOG,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned CAW  = (N / (2 * T) > 1) ? $clog2(N / (2 * T)) : 1,
  localparam int unsigned KD   = K - H
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ch_we,
  input  logic [CAW-1:0]        ch_waddr,
  input  logic [2*T-1:0][Q:0]   ch_wdata,
  input  logic [N-1:0]          info_set,
  input  logic                  start,
  output logic                  done,
  output logic                  busy,       // status: a frame is being decoded
  output logic [N_LOG-1:0]      cur_bit,    // status: bit being decoded
  output logic                  list_full,  // status: all L paths are in use
  output logic                  fail,
  output logic [LW-1:0]         sel,
  output logic [KD-1:0]         data
);
  localparam int unsigned SW  = $clog2(N_LOG + 1);
  dec_state_e state;
  assign busy = (state != ST_IDLE) && (state != ST_DONE);
  localparam int unsigned LAW = (N_LOG > 1 + $clog2(2 * T)) ? N_LOG - 1 - $clog2(2 * T) : 1;

  typedef logic [L-1:0][2*T-1:0][1:0][W-1:0] word_t;

  logic [N_LOG-1:0]   kcyc, commit_m;
  logic [SW-1:0]      lam, phi_i, lmem_rstage, wstage;
  logic               mode, csel, bsel, active, single, half, we;
  logic [CAW-1:0]     cmem_raddr;
  logic [LAW-1:0]     lmem_raddr, waddr;
  logic               init, prune, frozen, commit, info_step, crc_shift;

  logic [2*T-1:0][Q:0]        ch_rdata;
  logic [2*T-1:0][1:0][Q-1:0] ch_llm;
  word_t                      lmem_rdata, isel_word, cb_word, osel_word, rbuf;
  logic [L-1:0][T-1:0][1:0][W-1:0] pu_out;
  logic [L-1:0][T-1:0]        pu_u;
  logic [L-1:0][LW-1:0]       a, cc;
  logic [L-1:0]               c, cs;
  logic [L-1:0][1:0][W-1:0]   metric;
  logic [L-1:0][KD-1:0]       bits;

  dec_ctrl #(.N_LOG(N_LOG), .T(T), .K(K), .H(H)) u_ctrl (
    .clk, .rst_n, .start, .info_set,
    .state, .bit_i(cur_bit), .lam, .kcyc, .phi_i, .mode,
    .cmem_raddr, .lmem_rstage, .lmem_raddr, .csel, .bsel,
    .active, .single, .half, .we, .wstage, .waddr,
    .init, .prune, .frozen, .commit, .commit_m, .info_step, .crc_shift, .done
  );

  cmem #(.N_LOG(N_LOG), .T(T), .Q(Q)) u_cmem (
    .clk, .we(ch_we), .waddr(ch_waddr), .wdata(ch_wdata),
    .raddr(cmem_raddr), .rdata(ch_rdata)
  );

  decomp #(.Q(Q), .NE(2 * T)) u_decomp (.cmsg(ch_rdata), .llm(ch_llm));

  lmem #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) u_lmem (
    .clk, .we, .wstage, .waddr, .wdata(osel_word),
    .rstage(lmem_rstage), .raddr(lmem_raddr), .rdata(lmem_rdata)
  );

  isel #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) u_isel (
    .ch(ch_llm), .dout(lmem_rdata), .rbuf, .csel, .bsel, .word(isel_word)
  );

  crossbar #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) u_cb (.din(isel_word), .cc, .dout(cb_word));

  for (genvar l = 0; l < L; l++) begin : g_pua
    pua #(.N_LOG(N_LOG), .T(T), .Q(Q)) u_pua (
      .din(cb_word[l]), .u(pu_u[l]), .mode, .dout(pu_out[l])
    );
  end

  osel #(.N_LOG(N_LOG), .L(L), .T(T), .Q(Q)) u_osel (
    .clk, .pu_out, .active, .single, .half, .we, .word(osel_word), .rbuf
  );

  for (genvar l = 0; l < L; l++) begin : g_metric
    assign metric[l] = rbuf[l][0];
  end

  ppu #(.N_LOG(N_LOG), .L(L), .Q(Q)) u_ppu (
    .clk, .init, .prune, .frozen, .metric, .phi_i, .lam, .a, .c, .cc, .list_full
  );

  psu #(.N_LOG(N_LOG), .L(L), .T(T)) u_psu (
    .clk, .init, .commit, .m(commit_m), .a, .c, .lam, .kcyc, .u(pu_u)
  );

  crcu #(.L(L), .H(H), .POLY(POLY)) u_crcu (
    .clk, .init, .step(info_step), .shift(crc_shift), .a, .c, .cs
  );

  path_bits #(.L(L), .KD(KD)) u_bits (
    .clk, .step(info_step && !crc_shift), .a, .c, .bits
  );

  direct_sel #(.L(L), .KD(KD)) u_dsel (.cs, .bits, .sel, .fail, .data);
endmodule
