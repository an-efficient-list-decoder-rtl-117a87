// Maximum values filter (MVF): selects the L largest of 2L path metrics.
//
// Candidate D_{2l+u} = {metric of path l extended with bit u, l, u}. A
// bitonic sequence generator (BSG) of IS/DS sorters sorts blocks of 2, 4,
// ..., L candidates with alternating direction (block b of size 2^k rises
// when b is even), in log2(L) merge phases of 1, 2, ..., log2(L) columns, so
// S_0..S_{L-1} rise and S_L..S_{2L-1} fall. The L largest metrics are then
// max(S_r, S_{r+L}), r = 0..L-1, taken by L CAS units: CAS_r gives
// O_r = {a_r, c_r}, the path that path slot r continues and its new bit.
// No full sort is done. Purely combinational; the caller registers the
// result. Network and CAS stage follow the MVF figure (drawn there for
// L = 8); the order of the candidates at the input is this design's choice.
module mvf
  import polar_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned L     = L_DEF,
  parameter int unsigned Q     = Q_DEF,
  localparam int unsigned X1   = Q + N_LOG,          // metric width
  localparam int unsigned X2   = $clog2(L),          // list index width
  localparam int unsigned Z    = X1 + X2 + 1,
  localparam int unsigned LOGL = $clog2(L),
  localparam int unsigned NCOL = LOGL * (LOGL + 1) / 2
) (
  input  logic [L-1:0][1:0][X1-1:0] metric,  // metric[l][u]
  output logic [L-1:0][X2-1:0]      a,       // path copied into slot l
  output logic [L-1:0]              c        // bit appended in slot l
);
  logic [2*L-1:0][Z-1:0] col [NCOL+1];

  for (genvar l = 0; l < L; l++) begin : g_in
    for (genvar u = 0; u < 2; u++) begin : g_u
      assign col[0][2*l+u] = {metric[l][u], X2'(l), 1'(u)};
    end
  end

  for (genvar k = 1; k <= LOGL; k++) begin : g_phase
    for (genvar s = 0; s < k; s++) begin : g_step
      localparam int unsigned CI   = (k - 1) * k / 2 + s;
      localparam int unsigned DIST = 1 << (k - 1 - s);
      for (genvar i = 0; i < 2 * L; i++) begin : g_cmp
        if ((i & DIST) == 0) begin : g_pair
          sorter2 #(.Z(Z), .X1(X1), .DESC(((i >> k) & 1) != 0)) u_s (
            .si0(col[CI][i]), .si1(col[CI][i+DIST]),
            .so0(col[CI+1][i]), .so1(col[CI+1][i+DIST])
          );
        end
      end
    end
  end

  for (genvar r = 0; r < L; r++) begin : g_cas
    logic [X2:0] o;
    cas #(.Z(Z), .X1(X1)) u_cas (.si0(col[NCOL][r]), .si1(col[NCOL][r+L]), .co(o));
    assign a[r] = o[X2:1];
    assign c[r] = o[0];
  end
endmodule
