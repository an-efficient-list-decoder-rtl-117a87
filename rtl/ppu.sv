// Path pruning unit (PPU): MVF, decision register and CCG.
//
// After the last stage of an information bit the path metrics P_{l,n}[0][u]
// of all 2L extensions are in rBUF. In the pruning cycle (prune = 1) the MVF
// chooses the L survivors and the result {a_l, c_l} is registered at the
// end of the cycle: this is the single pipeline register of the pruning path
// (n_p = 1). Slot l then continues path a_l with bit c_l. After a frozen bit
// (frozen = 1) every slot keeps its own path with bit 0.
//
// Own choice, not in the paper: the decoder starts from a single path, and
// while fewer than L paths are alive (n_act < L) the survivors are not
// chosen by metric; instead every live path l keeps bit 0 in slot l and
// forks with bit 1 into slot l + n_act, and n_act doubles. After log2(L)
// information bits the list is full and the MVF decides from then on.
//
// The CCG's reference registers take their new values on the same edges
// (prune or frozen), and cc follows the stage being computed. init resets
// all of it for a new frame. a and c are registers; cc is combinational.
module ppu
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned X1   = Q + N_LOG,
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned SW   = $clog2(N_LOG + 1)
) (
  input  logic                      clk,
  input  logic                      init,
  input  logic                      prune,    // pruning cycle of an information bit
  input  logic                      frozen,   // end of the round of a frozen bit
  input  logic [L-1:0][1:0][X1-1:0] metric,   // from rBUF
  input  logic [SW-1:0]             phi_i,
  input  logic [SW-1:0]             lam,
  output logic [L-1:0][LW-1:0]      a,        // registered decision
  output logic [L-1:0]              c,
  output logic [L-1:0][LW-1:0]      cc,       // crossbar control
  output logic                      list_full
);
  logic [L-1:0][LW-1:0] mvf_a, nxt_a;
  logic [L-1:0]         mvf_c, nxt_c;
  logic [LW:0]          n_act;

  mvf #(.N_LOG(N_LOG), .L(L), .Q(Q)) u_mvf (.metric(metric), .a(mvf_a), .c(mvf_c));

  ccg #(.N_LOG(N_LOG), .L(L)) u_ccg (
    .clk(clk), .init(init), .commit(prune || frozen), .a(a),
    .phi_i(phi_i), .lam(lam), .cc(cc)
  );

  assign list_full = (n_act == (LW+1)'(L));

  always_comb begin
    for (int l = 0; l < L; l++) begin
      nxt_a[l] = LW'(l);
      nxt_c[l] = 1'b0;
    end
    if (prune) begin
      if (list_full) begin
        nxt_a = mvf_a;
        nxt_c = mvf_c;
      end else begin
        for (int l = 0; l < L; l++)
          if ((LW+1)'(l) >= n_act && (LW+1)'(l) < 2 * n_act) begin
            nxt_a[l] = LW'((LW+1)'(l) - n_act);
            nxt_c[l] = 1'b1;
          end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++) a[l] <= LW'(l);
      c     <= '0;
      n_act <= (LW+1)'(1);
    end else if (prune || frozen) begin
      a <= nxt_a;
      c <= nxt_c;
      if (prune && !list_full) n_act <= n_act << 1;
    end
  end
endmodule
